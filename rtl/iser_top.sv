// iser_top -- ISER: Delay-on-Miss shadow tracking with value recomputation.
//
// Under Delay-on-Miss a load that is still under a speculative shadow and
// misses in the L1 may not touch the memory hierarchy until every shadow over
// it is lifted. ISER lets the compiler pair such a load (emitted as RCMP)
// with a backward slice of arithmetic/logic instructions that recomputes the
// stored value. If the shadowed load misses, the slice is run inside the core
// with its own instruction buffer, rename table and scratch register file,
// and the result is handed to the load's consumers without any memory access
// and without later validation.
//
// This block joins:
//   shadow_buffer    one entry per shadow-casting instruction in the ROB;
//   release_queue    shadowed loads, released in order when their shadows
//                    are gone (a released delayed load may now be performed);
//   rcmp_unit        load / delay / recompute decision for each RCMP;
//   recompute_engine slice execution (IBuff, Hist, rename, SFile, ALU).
// The core (ROB, register file, L1 and MSHRs, fetch) is outside: its
// signals are the ports below.
//
// Interface, per cycle:
//   disp_*     one instruction entering the ROB: it may cast a shadow, be a
//              load, or both. A load is shadowed if the shadow buffer is not
//              empty when it enters (its own shadow only covers younger
//              instructions). disp_sb_seq/disp_rq_seq name the entries made.
//   resolve_*  a shadow lifted.  squash_*  drop everything from a point on
//              (also cancels a recomputation of a squashed RCMP).
//   release_*  a shadowed load has left all its shadows.
//   rcmp_*     an RCMP at execute with its L1 and MSHR lookup result;
//              rcmp_decision in the same cycle.
//   rec_*      a committed REC checkpointing one slice input into Hist.
//   fill_*     IBuff fill request and fill data (fetch logic). Fetched slice
//              instructions are held aside and enter the IBuff only once
//              the recomputed load is released; a squash drops them.
//   live_*     register-file reads for live slice inputs (combinational).
//   rc_done_*  recomputed value for load rc_done_load_id (write the RCMP's
//              physical register, wake up consumers).
//   rc_abort_* recomputation given up: treat the load as delayed on miss.
//   rc_busy    a slice is running, or released slice instructions are being
//              copied into the IBuff; an RCMP meanwhile delays on miss.
// The grouping and the rule of one dispatch, one RCMP and one slice at a time
// are this design's own simplifications; the blocks and their roles follow
// the source design.
module iser_top
  import iser_pkg::*;
#(
  parameter int unsigned SB_N     = SB_ENTRIES,
  parameter int unsigned RQ_N     = RQ_ENTRIES,
  parameter int unsigned IB_N     = IBUFF_ENTRIES,
  parameter int unsigned HIST_N   = HIST_ENTRIES,
  parameter int unsigned SF_N     = SFILE_ENTRIES,
  parameter int unsigned MAX_LEN  = MAX_SLICE_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // dispatch
  input  logic                 disp_valid,
  input  logic                 disp_casts_shadow,
  input  logic                 disp_is_load,
  input  logic [LOAD_ID_W-1:0] disp_load_id,
  output logic                 disp_ready,
  output logic [SEQ_W-1:0]     disp_sb_seq,
  output logic [SEQ_W-1:0]     disp_rq_seq,
  output logic                 disp_load_shadowed,
  // shadow resolution and squash
  input  logic                 resolve_valid,
  input  logic [SEQ_W-1:0]     resolve_sb_seq,
  input  logic                 squash_valid,
  input  logic [SEQ_W-1:0]     squash_sb_seq,
  input  logic [SEQ_W-1:0]     squash_rq_seq,
  // load release
  output logic                 release_valid,
  output logic [LOAD_ID_W-1:0] release_load_id,
  // RCMP at execute
  input  logic                 rcmp_valid,
  input  logic [LOAD_ID_W-1:0] rcmp_load_id,
  input  logic                 rcmp_in_rq,
  input  logic [SEQ_W-1:0]     rcmp_rq_seq,
  input  logic                 rcmp_slice_valid,
  input  logic [ADDR_W-1:0]    rcmp_slice_addr,
  input  logic                 l1_hit,
  input  logic                 mshr_hit,
  output rcmp_dec_e            rcmp_decision,
  // REC
  input  logic                 rec_valid,
  input  logic [ADDR_W-1:0]    rec_leaf_addr,
  input  logic [$clog2(HIST_INPUTS)-1:0] rec_slot,
  input  logic [DATA_W-1:0]    rec_data,
  // IBuff fill
  output logic                 fill_req,
  output logic [ADDR_W-1:0]    fill_req_addr,
  input  logic                 fill_valid,
  input  logic [ADDR_W-1:0]    fill_addr,
  input  slice_instr_t         fill_instr,
  // live operands
  output logic [AREG_W-1:0]    live_areg [2],
  input  logic [DATA_W-1:0]    live_data [2],
  // recomputation result
  output logic                 rc_done_valid,
  output logic [LOAD_ID_W-1:0] rc_done_load_id,
  output logic [DATA_W-1:0]    rc_done_data,
  output logic [15:0]          rc_done_cycles,
  output logic                 rc_abort_valid,
  output logic [LOAD_ID_W-1:0] rc_abort_load_id,
  output abort_e               rc_abort_cause,
  output logic                 rc_busy
);
  // ---- shadow tracking ----------------------------------------------------
  logic             sb_ready, sb_empty, rq_ready;
  logic [SEQ_W-1:0] sb_head, sb_tail, rq_alloc_seq;
  logic             need_sb, need_rq, sb_alloc, rq_alloc;
  logic             rq_shadowed_q;
  logic [SEQ_W-1:0] rel_rq_seq;

  assign need_sb    = disp_valid && disp_casts_shadow;
  assign need_rq    = disp_valid && disp_is_load && !sb_empty;
  assign disp_ready = (!need_sb || sb_ready) && (!need_rq || rq_ready) && !squash_valid;
  assign sb_alloc   = need_sb && disp_ready;
  assign rq_alloc   = need_rq && disp_ready;
  assign disp_load_shadowed = disp_is_load && !sb_empty;
  assign disp_rq_seq = rq_alloc_seq;

  shadow_buffer #(.ENTRIES(SB_N), .SEQ_BITS(SEQ_W)) u_sb (
    .clk, .rst_n,
    .alloc_valid(sb_alloc), .alloc_ready(sb_ready), .alloc_seq(disp_sb_seq),
    .resolve_valid, .resolve_seq(resolve_sb_seq),
    .squash_valid, .squash_seq(squash_sb_seq),
    .head_seq(sb_head), .tail_seq(sb_tail), .empty(sb_empty), .count()
  );

  release_queue #(.ENTRIES(RQ_N), .SEQ_BITS(SEQ_W), .ID_W(LOAD_ID_W)) u_rq (
    .clk, .rst_n,
    .alloc_valid(rq_alloc), .alloc_ready(rq_ready),
    .alloc_load_id(disp_load_id), .alloc_assoc(sb_tail), .alloc_rq_seq(rq_alloc_seq),
    .sb_head_seq(sb_head),
    .release_valid, .release_load_id, .release_rq_seq(rel_rq_seq),
    .query_rq_seq(rcmp_rq_seq), .query_shadowed(rq_shadowed_q),
    .squash_valid, .squash_rq_seq
  );

  // ---- RCMP decision ------------------------------------------------------
  logic start_rc, engine_busy, stage_draining;
  rcmp_unit u_rcmp (
    .rcmp_valid,
    .shadowed(rcmp_in_rq && rq_shadowed_q),
    .l1_hit, .mshr_hit,
    .slice_valid(rcmp_slice_valid),
    .engine_busy(engine_busy || stage_draining),
    .decision(rcmp_decision),
    .start_recompute(start_rc),
    .delay_load()
  );

  // ---- squash of the RCMP being recomputed --------------------------------
  logic [SEQ_W-1:0] active_rq_seq_q, sq_gap;
  logic             flush_rc;
  assign sq_gap   = active_rq_seq_q - squash_rq_seq;
  assign flush_rc = squash_valid && engine_busy && !sq_gap[SEQ_W-1];

  always_ff @(posedge clk) begin
    if (!rst_n) active_rq_seq_q <= '0;
    else if (start_rc) active_rq_seq_q <= rcmp_rq_seq;
  end

  // ---- recomputation engine -----------------------------------------------
  recompute_engine #(
    .IB_ENTRIES(IB_N), .HIST_N(HIST_N), .SF_ENTRIES(SF_N), .MAX_LEN(MAX_LEN)
  ) u_engine (
    .clk, .rst_n,
    .start_valid(start_rc), .start_slice_addr(rcmp_slice_addr),
    .start_load_id(rcmp_load_id), .start_owner(rcmp_rq_seq), .flush(flush_rc),
    .busy(engine_busy), .active_load_id(),
    .fill_req, .fill_req_addr, .fill_valid, .fill_addr, .fill_instr,
    .release_valid, .release_seq(rel_rq_seq), .squash_valid, .squash_seq(squash_rq_seq),
    .stage_draining,
    .rec_valid, .rec_leaf_addr, .rec_slot, .rec_data,
    .live_areg, .live_data,
    .done_valid(rc_done_valid), .done_load_id(rc_done_load_id),
    .done_data(rc_done_data), .done_cycles(rc_done_cycles),
    .abort_valid(rc_abort_valid), .abort_load_id(rc_abort_load_id),
    .abort_cause(rc_abort_cause)
  );
  assign rc_busy = engine_busy || stage_draining;
endmodule
