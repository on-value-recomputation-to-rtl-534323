// tb_shadow_buffer -- test of the shadow buffer.
// Directed: out-of-order resolution must not retire anything before the head
// is resolved, then entries retire one per cycle. Random: allocations,
// resolutions and squashes against a reference queue; pointers, empty and
// ready are compared every cycle.
//
// The circular buffer of shadow casters follows the source design; squash
// support and sequence-number naming are this design's own. Runs with 8
// entries; clock period 10 time units; watchdog included.
module tb_shadow_buffer;
  import iser_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_ready, resolve_valid = 0, squash_valid = 0, empty;
  logic [15:0] alloc_seq, resolve_seq, squash_seq, head_seq, tail_seq;
  logic [3:0] count;
  int checks = 0, failures = 0;
  int m_head = 0, m_tail = 0;
  bit m_res [N];

  shadow_buffer #(.ENTRIES(N), .SEQ_BITS(16)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("%t %s", $time, what); end
  endtask

  task automatic compare();
    chk($sformatf("head %0d exp %0d", head_seq, m_head), head_seq == 16'(m_head));
    chk($sformatf("tail %0d exp %0d", tail_seq, m_tail), tail_seq == 16'(m_tail) && alloc_seq == 16'(m_tail));
    chk("empty", empty == (m_head == m_tail));
    chk("ready", alloc_ready == ((m_tail - m_head) < N));
    chk("count", count == 4'(m_tail - m_head));
  endtask

  // advance the model by one clock edge with the inputs now applied
  task automatic model_edge();
    bit room;
    room = (m_tail - m_head) < N;
    if (m_tail != m_head && m_res[m_head % N] && !(squash_valid && squash_seq == 16'(m_head)))
      m_head++;
    if (squash_valid) m_tail = int'(squash_seq);
    else if (alloc_valid && room) begin
      m_res[m_tail % N] = 0; m_tail++;
    end
    if (resolve_valid) m_res[resolve_seq % N] = 1;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    resolve_seq = 0; squash_seq = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- directed ----
    @(negedge clk); compare();
    alloc_valid = 1;
    repeat (3) begin @(posedge clk); model_edge(); @(negedge clk); end
    alloc_valid = 0;
    chk("three allocated", tail_seq == 3 && head_seq == 0);
    resolve_valid = 1; resolve_seq = 2; @(posedge clk); model_edge(); @(negedge clk);
    resolve_seq = 1; @(posedge clk); model_edge(); @(negedge clk);
    resolve_valid = 0;
    repeat (3) begin @(posedge clk); model_edge(); @(negedge clk); end
    chk("head waits for unresolved oldest shadow", head_seq == 0);
    resolve_valid = 1; resolve_seq = 0; @(posedge clk); model_edge(); @(negedge clk);
    resolve_valid = 0;
    chk("not yet retired in the resolve cycle", head_seq == 0);
    @(posedge clk); model_edge(); @(negedge clk);
    chk("one retired", head_seq == 1);
    @(posedge clk); model_edge(); @(negedge clk);
    chk("two retired", head_seq == 2);
    @(posedge clk); model_edge(); @(negedge clk);
    chk("all retired, empty", head_seq == 3 && empty);
    // ---- random ----
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      compare();
      alloc_valid   = $urandom_range(0, 1);
      squash_valid  = ($urandom_range(0, 40) == 0);
      squash_seq    = 16'(m_head + $urandom_range(0, m_tail - m_head));
      resolve_valid = 0;
      if (!squash_valid && m_tail != m_head && $urandom_range(0, 2) != 0) begin
        resolve_valid = 1;
        resolve_seq   = 16'(m_head + $urandom_range(0, m_tail - m_head - 1));
      end
      @(posedge clk);
      model_edge();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
