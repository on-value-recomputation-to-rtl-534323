// release_queue -- releases shadowed loads when all older shadows are gone.
//
// A load that enters the ROB while the shadow buffer is not empty gets an
// entry here holding its load tag and the shadow buffer's tail at that time
// (its "associated" shadow position). Because shadows retire in program order,
// the load is no longer speculative once the shadow buffer's head has reached
// that position. Loads are released in order: only the queue head is compared
// with the shadow-buffer head, so no associative search is needed. This is
// the mechanism of the source design. Here the associated position is the
// tail sequence number (next free slot) and the test is a signed difference
// of sequence numbers, which also holds after the head has moved further on.
//
// Interface:
//   alloc_valid/ready, alloc_load_id, alloc_assoc  enqueue a shadowed load;
//                                           alloc_rq_seq names its entry.
//   sb_head_seq                             shadow-buffer head.
//   release_valid/load_id/rq_seq            one load released this cycle
//                                           (combinational, popped at the edge).
//   query_rq_seq -> query_shadowed          whether a given entry is still
//                                           waiting (in [head, tail)).
//   squash_valid/rq_seq                     drop entries from rq_seq onwards.
// Timing: at most one release and one allocation per cycle (own choice).
module release_queue
  import iser_pkg::*;
#(
  parameter int unsigned ENTRIES  = RQ_ENTRIES,
  parameter int unsigned SEQ_BITS = SEQ_W,
  parameter int unsigned ID_W     = LOAD_ID_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                alloc_valid,
  output logic                alloc_ready,
  input  logic [ID_W-1:0]     alloc_load_id,
  input  logic [SEQ_BITS-1:0] alloc_assoc,
  output logic [SEQ_BITS-1:0] alloc_rq_seq,
  input  logic [SEQ_BITS-1:0] sb_head_seq,
  output logic                release_valid,
  output logic [ID_W-1:0]     release_load_id,
  output logic [SEQ_BITS-1:0] release_rq_seq,
  input  logic [SEQ_BITS-1:0] query_rq_seq,
  output logic                query_shadowed,
  input  logic                squash_valid,
  input  logic [SEQ_BITS-1:0] squash_rq_seq
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);

  typedef struct packed {
    logic [ID_W-1:0]     load_id;
    logic [SEQ_BITS-1:0] assoc;
  } rq_entry_t;

  rq_entry_t           q [ENTRIES];
  logic [SEQ_BITS-1:0] head_q, tail_q;
  logic [SEQ_BITS-1:0] occ, gap;
  rq_entry_t           head_e;

  assign occ          = tail_q - head_q;
  assign alloc_ready  = (occ < SEQ_BITS'(ENTRIES));
  assign alloc_rq_seq = tail_q;
  assign head_e       = q[head_q[IDX_W-1:0]];
  // Head of the shadow buffer at or beyond the load's position: released.
  assign gap            = sb_head_seq - head_e.assoc;
  // A squash that removes the head entry itself cancels its release.
  assign release_valid   = (occ != '0) && !gap[SEQ_BITS-1] &&
                           !(squash_valid && squash_rq_seq == head_q);
  assign release_load_id = head_e.load_id;
  assign release_rq_seq  = head_q;
  assign query_shadowed  = (SEQ_BITS'(query_rq_seq - head_q) < occ);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q <= '0;
      tail_q <= '0;
    end else begin
      if (release_valid) head_q <= head_q + 1'b1;
      if (squash_valid) tail_q <= squash_rq_seq;
      else if (alloc_valid && alloc_ready) tail_q <= tail_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid && alloc_ready && !squash_valid)
      q[tail_q[IDX_W-1:0]] <= '{load_id: alloc_load_id, assoc: alloc_assoc};
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    occ <= SEQ_BITS'(ENTRIES));
  a_squash_inside: assert property (@(posedge clk) disable iff (!rst_n)
    squash_valid |-> (SEQ_BITS'(squash_rq_seq - head_q) <= occ));
endmodule
