// ibuff -- instruction buffer for slice instructions.
//
// Caches slice instructions so that recomputation does not compete with the
// core for the instruction cache. The source design gives its role (fetch
// logic fills it, it feeds the slice rename logic) but not its organisation;
// here it is a direct-mapped buffer indexed by the low bits of the
// instruction address and tagged with the full address. Slice instructions
// sit at consecutive addresses, so a slice of up to ENTRIES instructions fits
// without conflicts. ENTRIES = 128 covers the 100-instruction slice limit.
//
// Interface:
//   fill_valid/addr/instr  write one instruction. Inside the engine this
//                          port is fed by ibuff_stage, which passes on
//                          fetched instructions only once the load that
//                          needed them is no longer speculative.
//   rd_addr -> rd_hit, rd_instr  combinational lookup.
// Timing: a fill is visible to lookups from the next cycle on.
module ibuff
  import iser_pkg::*;
#(
  parameter int unsigned ENTRIES = IBUFF_ENTRIES,
  parameter int unsigned AW      = ADDR_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         fill_valid,
  input  logic [AW-1:0] fill_addr,
  input  slice_instr_t fill_instr,
  input  logic [AW-1:0] rd_addr,
  output logic         rd_hit,
  output slice_instr_t rd_instr
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned TAG_W = AW - IDX_W;

  slice_instr_t       instr_mem [ENTRIES];
  logic [TAG_W-1:0]   tag_mem   [ENTRIES];
  logic [ENTRIES-1:0] valid_q;

  logic [IDX_W-1:0] fill_idx, rd_idx;
  assign fill_idx = fill_addr[IDX_W-1:0];
  assign rd_idx   = rd_addr[IDX_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) valid_q <= '0;
    else if (fill_valid) valid_q[fill_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      instr_mem[fill_idx] <= fill_instr;
      tag_mem[fill_idx]   <= fill_addr[AW-1:IDX_W];
    end
  end

  assign rd_hit   = valid_q[rd_idx] && (tag_mem[rd_idx] == rd_addr[AW-1:IDX_W]);
  assign rd_instr = instr_mem[rd_idx];
endmodule
