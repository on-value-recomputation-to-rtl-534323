// tb_hist_table -- test of the History table.
// Directed: two inputs of one leaf, replacement by a conflicting leaf, miss of
// an absent leaf. Random: REC writes and lookups against a reference model of
// the direct-mapped table.
//
// The expected behaviour (entries named by leaf address, one slot written per
// committed REC) follows the source design; the direct-mapped replacement
// checked here is this design's own organisation. Runs with 16 entries so that
// conflicts are frequent; clock period 10 time units, about 4500 checks, watchdog 50k cycles.
module tb_hist_table;
  import iser_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, rec_valid = 0;
  logic [ADDR_W-1:0] rec_leaf_addr, rd_addr;
  logic [0:0] rec_slot;
  logic [63:0] rec_data;
  logic rd_hit;
  logic [1:0] rd_valid;
  logic [63:0] rd_data [2];
  logic [ADDR_W-1:0] r_addr [N];
  logic [1:0] r_v [N];
  logic [63:0] r_d [N][2];
  int checks = 0, failures = 0;

  hist_table #(.ENTRIES(N), .INPUTS(2), .AW(ADDR_W), .DW(64)) dut (.*);
  always #5 clk = ~clk;

  task automatic rec(input logic [ADDR_W-1:0] a, input int s, input logic [63:0] d);
    int i;
    @(negedge clk);
    rec_valid = 1; rec_leaf_addr = a; rec_slot = 1'(s); rec_data = d;
    @(posedge clk);
    i = int'(a[3:0]);
    if (r_v[i] != 0 && r_addr[i] == a) r_v[i][s] = 1'b1;
    else begin r_v[i] = 2'b00; r_v[i][s] = 1'b1; end
    r_addr[i] = a; r_d[i][s] = d;
    @(negedge clk);
    rec_valid = 0;
  endtask

  task automatic look(input logic [ADDR_W-1:0] a);
    int i;
    logic h;
    rd_addr = a; #1;
    i = int'(a[3:0]);
    h = (r_v[i] != 0) && r_addr[i] == a;
    checks++;
    if (rd_hit !== h) begin failures++; $display("addr %h hit %b exp %b", a, rd_hit, h); end
    for (int s = 0; s < 2; s++) begin
      checks++;
      if (rd_valid[s] !== (h && r_v[i][s]) || (h && r_v[i][s] && rd_data[s] !== r_d[i][s])) begin
        failures++;
        if (failures < 10) $display("addr %h slot %0d v %b d %h exp %h", a, s, rd_valid[s], rd_data[s], r_d[i][s]);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) r_v[i] = 2'b00;
    rec_leaf_addr = '0; rec_slot = 0; rec_data = '0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: leaf 0x101 gets both inputs
    rec(48'h101, 0, 64'd11);
    rec(48'h101, 1, 64'd22);
    rd_addr = 48'h101; #1;
    checks++;
    if (!(rd_hit && rd_valid == 2'b11 && rd_data[0] == 64'd11 && rd_data[1] == 64'd22)) begin
      failures++; $display("directed both slots failed");
    end
    // a different leaf mapping to the same entry (0x111) replaces it
    rec(48'h111, 1, 64'd33);
    rd_addr = 48'h101; #1;
    checks++; if (rd_hit) begin failures++; $display("replaced leaf still hits"); end
    rd_addr = 48'h111; #1;
    checks++; if (!(rd_hit && rd_valid == 2'b10 && rd_data[1] == 64'd33)) begin
      failures++; $display("replacing leaf wrong");
    end
    for (int n = 0; n < 1500; n++) begin
      rec(48'h100 + 48'($urandom_range(0, 47)), $urandom_range(0, 1), {$urandom, $urandom});
      look(48'h100 + 48'($urandom_range(0, 47)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
