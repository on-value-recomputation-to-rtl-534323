// sfile -- Scratch-File: the register file of a recomputation.
//
// While a slice runs, every value it produces is written here instead of to
// the core's physical register file, so recomputation leaves no trace in the
// core's state. Two read ports (slice instructions have up to two register
// sources) and one write port (one instruction at a time). A written bit per
// entry, cleared at the start of each slice, lets reads report whether the
// entry holds a value of the current slice. Size and port count are this
// design's choice; the source design only calls it small.
// Timing: reads are combinational; a write is visible from the next cycle.
module sfile
  import iser_pkg::*;
#(
  parameter int unsigned ENTRIES = SFILE_ENTRIES,
  parameter int unsigned DW      = DATA_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       wr_en,
  input  logic [$clog2(ENTRIES)-1:0] wr_idx,
  input  logic [DW-1:0]              wr_data,
  input  logic [$clog2(ENTRIES)-1:0] rd_idx [2],
  output logic [DW-1:0]              rd_data [2],
  output logic [1:0]                 rd_written
);
  logic [DW-1:0]      regs [ENTRIES];
  logic [ENTRIES-1:0] written_q;

  always_ff @(posedge clk) begin
    if (!rst_n) written_q <= '0;
    else if (clear) written_q <= '0;
    else if (wr_en) written_q[wr_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear) regs[wr_idx] <= wr_data;
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      rd_data[p]    = regs[rd_idx[p]];
      rd_written[p] = written_q[rd_idx[p]];
    end
  end
endmodule
