// tb_sfile -- test of the scratch file: random writes and reads against a
// reference array, written bits, and clear.
//
// A scratch register file that isolates slice results follows the source
// design; ports, size and the written bits are this design's own.
// clock period 10 time units; watchdog included.
module tb_sfile;
  import iser_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  logic [4:0] wr_idx;
  logic [63:0] wr_data;
  logic [4:0] rd_idx [2];
  logic [63:0] rd_data [2];
  logic [1:0] rd_written;
  logic [63:0] ref_d [N];
  logic [N-1:0] ref_w;
  int checks = 0, failures = 0;

  sfile #(.ENTRIES(N), .DW(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_w = '0;
    rd_idx = '{0, 0};
    wr_idx = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check reads
      for (int p = 0; p < 2; p++) begin
        rd_idx[p] = 5'($urandom_range(0, N-1));
      end
      #1;
      for (int p = 0; p < 2; p++) begin
        checks++;
        if (rd_written[p] !== ref_w[rd_idx[p]] ||
            (ref_w[rd_idx[p]] && rd_data[p] !== ref_d[rd_idx[p]])) begin
          failures++;
          if (failures < 10) $display("rd %0d idx %0d data %h exp %h w %b", p, rd_idx[p], rd_data[p], ref_d[rd_idx[p]], rd_written[p]);
        end
      end
      clear   = ($urandom_range(0, 99) == 0);
      wr_en   = $urandom_range(0, 1);
      wr_idx  = 5'($urandom_range(0, N-1));
      wr_data = {$urandom, $urandom};
      @(posedge clk);
      if (clear) ref_w = '0;
      else if (wr_en) begin ref_w[wr_idx] = 1'b1; ref_d[wr_idx] = wr_data; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
