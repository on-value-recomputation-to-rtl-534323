// ibuff_stage -- holds slice instructions fetched under speculation until the
// load that needed them is no longer speculative, then copies them into the
// IBuff.
//
// A recomputation always runs for a load that is still under a shadow. If
// its instruction fetches went straight into the IBuff, a misspeculated load
// could leave a trace there (a later recomputation of the same slice would
// be faster). The source design rules this out: changes to the IBuff and
// Hist are only made once the instruction causing them is no longer
// speculative. This block is how that rule is met for the IBuff.
//
// How it works: the stage belongs to one slice (base address) and one owner
// (the release-queue sequence number of the load being recomputed). Fills
// land in entry (fill_addr - base), so no associative search is needed; a
// slice never has more than LEN instructions. The engine looks up the stage
// next to the IBuff, so a slice being fetched for the first time still runs.
//   * start of a recomputation of the same slice: entries are kept and the
//     new (younger) load becomes the owner, so the entries wait for the
//     younger release, which is never earlier than the older one;
//   * start for another slice: the unreleased entries are dropped;
//   * owner released: entries become committable and are written into the
//     IBuff, lowest offset first, one per cycle, while the engine is idle;
//     draining is high meanwhile and no new recomputation may start;
//   * owner squashed (squash point at or before it): entries are dropped.
// Losing entries only costs a refetch; it never affects a result.
//
// Interface and timing:
//   start_valid/start_addr/start_owner  a recomputation begins (one cycle).
//   fill_valid/fill_addr/fill_instr     a fetched slice instruction.
//   rd_addr -> rd_hit/rd_instr          combinational lookup; fills are
//                                       visible from the next cycle.
//   release_*, squash_*                 release-queue events.
//   engine_idle                         the engine runs no slice.
//   wr_valid/wr_addr/wr_instr           IBuff write, one per cycle.
//   draining                            committable entries are left.
// The staging idea follows the source design's rule; its organisation
// (offset-indexed, single owner, drain when idle) is this design's own.
module ibuff_stage
  import iser_pkg::*;
#(
  parameter int unsigned LEN      = MAX_SLICE_LEN,
  parameter int unsigned AW       = ADDR_W,
  parameter int unsigned SEQ_BITS = SEQ_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start_valid,
  input  logic [AW-1:0]       start_addr,
  input  logic [SEQ_BITS-1:0] start_owner,
  input  logic                fill_valid,
  input  logic [AW-1:0]       fill_addr,
  input  slice_instr_t        fill_instr,
  input  logic [AW-1:0]       rd_addr,
  output logic                rd_hit,
  output slice_instr_t        rd_instr,
  input  logic                release_valid,
  input  logic [SEQ_BITS-1:0] release_seq,
  input  logic                squash_valid,
  input  logic [SEQ_BITS-1:0] squash_seq,
  input  logic                engine_idle,
  output logic                wr_valid,
  output logic [AW-1:0]       wr_addr,
  output slice_instr_t        wr_instr,
  output logic                draining
);
  localparam int unsigned OW = $clog2(LEN);

  logic [AW-1:0]       base_q;
  logic [SEQ_BITS-1:0] owner_q;
  logic                held_q;   // stage belongs to a slice and an owner
  logic                ok_q;     // owner released: entries may be committed
  logic [LEN-1:0]      valid_q;
  slice_instr_t        mem_q [LEN];

  // lookup
  logic [AW-1:0] rd_off;
  assign rd_off   = rd_addr - base_q;
  assign rd_hit   = held_q && (rd_off < AW'(LEN)) && valid_q[rd_off[OW-1:0]];
  assign rd_instr = mem_q[rd_off[OW-1:0]];

  // fill
  logic [AW-1:0] f_off;
  logic          f_in;
  assign f_off = fill_addr - base_q;
  assign f_in  = fill_valid && held_q && (f_off < AW'(LEN));

  // drain: lowest valid entry first
  logic [OW-1:0] d_idx;
  logic          any_valid;
  always_comb begin
    d_idx = '0;
    any_valid = 1'b0;
    for (int i = LEN - 1; i >= 0; i--) if (valid_q[i]) begin
      d_idx = OW'(i);
      any_valid = 1'b1;
    end
  end
  assign draining = held_q && ok_q && any_valid;
  assign wr_valid = draining && engine_idle;
  assign wr_addr  = base_q + AW'(d_idx);
  assign wr_instr = mem_q[d_idx];

  // owner events
  logic [SEQ_BITS-1:0] sq_gap;
  logic                owner_squashed, owner_released;
  assign sq_gap         = owner_q - squash_seq;
  assign owner_squashed = squash_valid && held_q && !ok_q && !sq_gap[SEQ_BITS-1];
  assign owner_released = release_valid && held_q && release_seq == owner_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base_q  <= '0;
      owner_q <= '0;
      held_q  <= 1'b0;
      ok_q    <= 1'b0;
      valid_q <= '0;
    end else if (start_valid) begin
      // a new recomputation (never while draining)
      if (!(held_q && base_q == start_addr)) valid_q <= '0;
      base_q  <= start_addr;
      owner_q <= start_owner;
      held_q  <= 1'b1;
      ok_q    <= release_valid && release_seq == start_owner;
    end else if (owner_squashed) begin
      held_q  <= 1'b0;
      valid_q <= '0;
    end else begin
      if (owner_released) ok_q <= 1'b1;
      if (wr_valid) valid_q[d_idx] <= 1'b0;
      if (f_in) begin  // a fill into the slot being drained keeps it valid
        valid_q[f_off[OW-1:0]] <= 1'b1;
        mem_q[f_off[OW-1:0]]   <= fill_instr;
      end
      // fully drained: the stage is free again
      if (ok_q && engine_idle && !f_in &&
          (valid_q & ~(LEN'(wr_valid) << d_idx)) == '0)
        held_q <= 1'b0;
    end
  end

  a_no_start_while_draining: assert property (@(posedge clk) disable iff (!rst_n)
    start_valid |-> !draining);
  a_drain_only_released: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> ok_q);
endmodule
