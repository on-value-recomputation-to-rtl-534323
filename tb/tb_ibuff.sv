// tb_ibuff -- test of the slice instruction buffer.
// Random fills and lookups against a reference of what each direct-mapped
// slot holds; checks hits, misses after a conflicting fill, and data.
//
// What is checked (a slice instruction cache filled by fetch and read by
// address) follows the source design; direct mapping and the tag check are
// this design's own. Runs with 16 entries; clock period 10 time units; watchdog included.
module tb_ibuff;
  import iser_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, fill_valid = 0;
  logic [ADDR_W-1:0] fill_addr, rd_addr;
  slice_instr_t fill_instr, rd_instr;
  logic rd_hit;
  logic [ADDR_W-1:0] ref_tag [N];
  slice_instr_t ref_ins [N];
  logic [N-1:0] ref_v;
  int checks = 0, failures = 0;

  ibuff #(.ENTRIES(N), .AW(ADDR_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // addresses drawn from a small window so that hits and conflicts both occur
  function automatic logic [ADDR_W-1:0] pick();
    return ADDR_W'(48'h4000) + ADDR_W'($urandom_range(0, 3 * N));
  endfunction

  initial begin
    int i;
    ref_v = '0;
    fill_addr = '0; rd_addr = '0; fill_instr = '0;
    repeat (2) @(posedge clk);
    // empty after reset
    rd_addr = 48'h4000; #1;
    checks++; if (rd_hit) begin failures++; $display("hit after reset"); end
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      rd_addr = pick();
      #1;
      i = int'(rd_addr[3:0]);
      checks++;
      if (rd_hit !== (ref_v[i] && ref_tag[i] == rd_addr) ||
          (rd_hit && rd_instr !== ref_ins[i])) begin
        failures++;
        if (failures < 10) $display("addr %h hit %b", rd_addr, rd_hit);
      end
      fill_valid = $urandom_range(0, 1);
      fill_addr  = pick();
      fill_instr = slice_instr_t'({$urandom, $urandom});
      @(posedge clk);
      if (fill_valid) begin
        i = int'(fill_addr[3:0]);
        ref_v[i] = 1'b1; ref_tag[i] = fill_addr; ref_ins[i] = fill_instr;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
