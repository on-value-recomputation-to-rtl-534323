// tb_release_queue -- test of the release queue.
// The shadow-buffer head is driven by the test. Loads are queued with the
// shadow-buffer tail they saw; a load must be released exactly when the head
// has reached that position, in order, one per cycle. The query port must
// report loads still waiting. Squashes drop younger loads.
//
// The release rule (a load waits until the shadow-buffer head passes the
// position recorded at dispatch, checked only at the queue head) follows the
// source design; squash handling and the query port are this design's own.
// Runs with 8 entries; clock period 10 time units; watchdog included.
module tb_release_queue;
  import iser_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready, release_valid, query_shadowed, squash_valid = 0;
  logic [7:0] alloc_load_id, release_load_id;
  logic [15:0] alloc_assoc, alloc_rq_seq, sb_head_seq, release_rq_seq, query_rq_seq, squash_rq_seq;
  int checks = 0, failures = 0, releases = 0;
  int m_head = 0, m_tail = 0, sb_tail = 0, sbh = 0;
  int m_assoc [N];
  int m_id [N];

  release_queue #(.ENTRIES(N), .SEQ_BITS(16), .ID_W(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t %s", $time, what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_rel, room;
    alloc_load_id = 0; alloc_assoc = 0; sb_head_seq = 0; query_rq_seq = 0; squash_rq_seq = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- directed: load behind shadows 0..2 is released when the head reaches 3 ----
    @(negedge clk);
    alloc_valid = 1; alloc_load_id = 8'd42; alloc_assoc = 16'd3;
    @(posedge clk); @(negedge clk);
    alloc_valid = 0;
    query_rq_seq = 0;
    for (int h = 0; h < 3; h++) begin
      sb_head_seq = 16'(h); #1;
      chk($sformatf("released early at head %0d", h), !release_valid && query_shadowed);
      @(posedge clk); @(negedge clk);
    end
    sb_head_seq = 16'd3; #1;
    chk("released when head reaches its position", release_valid && release_load_id == 8'd42);
    @(posedge clk); @(negedge clk);
    #1 chk("queue empty after release", !release_valid && !query_shadowed);
    m_head = 1; m_tail = 1; sbh = 3; sb_tail = 3;
    // ---- random ----
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      sb_head_seq = 16'(sbh);
      query_rq_seq = 16'(m_head - 2 + $urandom_range(0, N + 3));
      #1;
      exp_rel = (m_tail != m_head) && (sbh - m_assoc[m_head % N] >= 0);
      squash_valid  = ($urandom_range(0, 60) == 0);
      squash_rq_seq = 16'(m_head + $urandom_range(0, m_tail - m_head));
      if (squash_valid && squash_rq_seq == 16'(m_head)) exp_rel = 0;
      #1;
      chk($sformatf("release %b exp %b", release_valid, exp_rel), release_valid == exp_rel);
      if (exp_rel) chk("released id", release_load_id == 8'(m_id[m_head % N]) && release_rq_seq == 16'(m_head));
      chk("query", query_shadowed == ((int'(query_rq_seq) - m_head) >= 0 && (int'(query_rq_seq) - m_head) < (m_tail - m_head)));
      chk("ready", alloc_ready == ((m_tail - m_head) < N));
      alloc_valid   = $urandom_range(0, 1);
      alloc_load_id = 8'($urandom);
      if ($urandom_range(0, 2) == 0) sb_tail++;
      alloc_assoc   = 16'(sb_tail);
      room = (m_tail - m_head) < N;
      @(posedge clk);
      if (exp_rel) begin m_head++; releases++; end
      if (squash_valid) m_tail = int'(squash_rq_seq);
      else if (alloc_valid && room) begin
        m_assoc[m_tail % N] = sb_tail; m_id[m_tail % N] = int'(alloc_load_id); m_tail++;
      end
      if (sbh < sb_tail && $urandom_range(0, 2) == 0) sbh++;
    end
    chk("releases happened", releases > 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
