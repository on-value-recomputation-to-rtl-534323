// shadow_buffer -- in-order tracking of speculative shadows.
//
// Every shadow-casting instruction (one that may raise an exception, an
// unresolved branch, a store with an unknown address, a memory access that may
// violate the memory order) gets an entry at the tail when it enters the
// reorder buffer. The core marks the entry resolved when the shadow is lifted;
// resolved entries leave from the head in program order, one per cycle. The
// buffer is a circular buffer like the ROB, as in the source design.
//
// Entries are named by a sequence number (SEQ_W bits, wrapping) rather than by
// a bare index, so that a load can remember the tail it saw and later decide,
// with one subtraction, whether the head has moved past it (see
// release_queue). The entry index is the low bits of the sequence number.
//
// Interface (all synchronous to clk, active-low reset):
//   alloc_valid/alloc_ready  allocate one entry; alloc_seq names it.
//   resolve_valid/seq        mark an allocated entry resolved.
//   squash_valid/seq         drop every entry from seq (inclusive) to the tail;
//                            the tail becomes seq. Takes priority over alloc.
//   head_seq, tail_seq       current pointers; empty/count.
// Timing: one allocation and one retirement per cycle; a resolved head is
// retired on the next clock edge. One allocation per cycle, the sequence
// number width and the entry count are this design's own choices.
module shadow_buffer
  import iser_pkg::*;
#(
  parameter int unsigned ENTRIES = SB_ENTRIES,
  parameter int unsigned SEQ_BITS = SEQ_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                alloc_valid,
  output logic                alloc_ready,
  output logic [SEQ_BITS-1:0] alloc_seq,
  input  logic                resolve_valid,
  input  logic [SEQ_BITS-1:0] resolve_seq,
  input  logic                squash_valid,
  input  logic [SEQ_BITS-1:0] squash_seq,
  output logic [SEQ_BITS-1:0] head_seq,
  output logic [SEQ_BITS-1:0] tail_seq,
  output logic                empty,
  output logic [$clog2(ENTRIES+1)-1:0] count
);
  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [SEQ_BITS-1:0] head_q, tail_q;
  logic [ENTRIES-1:0]  resolved_q;
  logic [SEQ_BITS-1:0] occ;
  logic                retire;

  assign occ         = tail_q - head_q;
  assign count       = occ[$clog2(ENTRIES+1)-1:0];
  assign empty       = (occ == '0);
  assign alloc_ready = (occ < SEQ_BITS'(ENTRIES));
  assign alloc_seq   = tail_q;
  assign head_seq    = head_q;
  assign tail_seq    = tail_q;
  assign retire      = !empty && resolved_q[head_q[IDX_W-1:0]] &&
                       !(squash_valid && squash_seq == head_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      head_q     <= '0;
      tail_q     <= '0;
      resolved_q <= '0;
    end else begin
      if (retire) head_q <= head_q + 1'b1;
      if (squash_valid) begin
        tail_q <= squash_seq;
      end else if (alloc_valid && alloc_ready) begin
        resolved_q[tail_q[IDX_W-1:0]] <= 1'b0;
        tail_q <= tail_q + 1'b1;
      end
      if (resolve_valid) resolved_q[resolve_seq[IDX_W-1:0]] <= 1'b1;
    end
  end

  // A resolve must name a live entry; a squash point must lie inside the buffer.
  a_resolve_live: assert property (@(posedge clk) disable iff (!rst_n)
    resolve_valid |-> (SEQ_BITS'(resolve_seq - head_q) < occ));
  a_squash_inside: assert property (@(posedge clk) disable iff (!rst_n)
    squash_valid |-> (SEQ_BITS'(squash_seq - head_q) <= occ));
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    occ <= SEQ_BITS'(ENTRIES));
endmodule
