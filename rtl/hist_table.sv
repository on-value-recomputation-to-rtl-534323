// hist_table -- History table (Hist) of checkpointed slice inputs.
//
// When a slice's terminal (leaf) instruction needs an operand that will no
// longer be live at recomputation time (an overwritten register, a value read
// from memory), the program executes REC right after the producer of that
// operand. REC stores the value under the leaf instruction's address. During
// recomputation the leaf instruction looks its inputs up by its own address.
// Each entry holds the leaf address and its non-constant, non-live inputs, as
// in the source design.
//
// Organisation (own choice): direct-mapped on the low address bits, the full
// leaf address stored as the tag, HIST_INPUTS operand slots with a valid bit
// each. A REC for another leaf that maps to the same entry replaces it, which
// only costs a recomputation opportunity (the slice then falls back to delay
// on miss). Default size: 1024 entries x (48-bit address + 2 x 64-bit inputs)
// = 22 KiB, the storage the source design budgets for Hist.
// REC writes must be presented when the REC is no longer speculative
// (at commit), so that Hist never holds transient state.
//
// Interface:
//   rec_valid/leaf_addr/slot/data  write one checkpointed operand.
//   rd_addr -> rd_hit, rd_valid[], rd_data[]  combinational lookup.
module hist_table
  import iser_pkg::*;
#(
  parameter int unsigned ENTRIES = HIST_ENTRIES,
  parameter int unsigned INPUTS  = HIST_INPUTS,
  parameter int unsigned AW      = ADDR_W,
  parameter int unsigned DW      = DATA_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rec_valid,
  input  logic [AW-1:0]             rec_leaf_addr,
  input  logic [$clog2(INPUTS)-1:0] rec_slot,
  input  logic [DW-1:0]             rec_data,
  input  logic [AW-1:0]             rd_addr,
  output logic                      rd_hit,
  output logic [INPUTS-1:0]         rd_valid,
  output logic [DW-1:0]             rd_data [INPUTS]
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [AW-1:0]     addr_mem [ENTRIES];
  logic [DW-1:0]     data_mem [INPUTS][ENTRIES];
  logic [INPUTS-1:0] valid_q  [ENTRIES];

  logic [IDX_W-1:0] w_idx, r_idx;
  logic             w_same;
  assign w_idx  = rec_leaf_addr[IDX_W-1:0];
  assign r_idx  = rd_addr[IDX_W-1:0];
  assign w_same = (valid_q[w_idx] != '0) && (addr_mem[w_idx] == rec_leaf_addr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) valid_q[i] <= '0;
    end else if (rec_valid) begin
      // Same leaf: add the slot. Other leaf: the entry is taken over.
      if (w_same) valid_q[w_idx][rec_slot] <= 1'b1;
      else        valid_q[w_idx] <= INPUTS'(1) << rec_slot;
    end
  end

  always_ff @(posedge clk) begin
    if (rec_valid) begin
      addr_mem[w_idx]           <= rec_leaf_addr;
      data_mem[rec_slot][w_idx] <= rec_data;
    end
  end

  assign rd_hit = (valid_q[r_idx] != '0) && (addr_mem[r_idx] == rd_addr);
  always_comb begin
    for (int s = 0; s < INPUTS; s++) begin
      rd_valid[s] = rd_hit && valid_q[r_idx][s];
      rd_data[s]  = data_mem[s][r_idx];
    end
  end

  a_slot_range: assert property (@(posedge clk) disable iff (!rst_n)
    rec_valid |-> (32'(rec_slot) < INPUTS));
endmodule
