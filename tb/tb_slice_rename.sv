// tb_slice_rename -- test of the slice rename table.
// Random destination allocations and lookups: a mapped register must point at
// the entry it was last given, no two mapped registers may share an entry,
// allocation must never run dry however many renames happen (entries are
// recycled), and clear must unmap everything.
//
// Renaming slice registers onto SFile entries follows the source design; the
// free-list policy checked here is this design's own. Clock period 100 time units (lookups
// are combinational and need settling time in the testbench); watchdog.
module tb_slice_rename;
  import iser_pkg::*;
  localparam int NR = 16, NE = 32;
  logic clk = 0, rst_n = 0, clear = 0, alloc_valid = 0;
  logic [3:0] lk_areg [2];
  logic [1:0] lk_mapped;
  logic [4:0] lk_sidx [2];
  logic [3:0] alloc_areg;
  logic alloc_ok;
  logic [4:0] alloc_sidx;
  logic [NR-1:0] r_m;
  logic [4:0] got;
  logic [4:0] r_s [NR];
  int checks = 0, failures = 0;

  slice_rename #(.NAREGS(NR), .ENTRIES(NE)) dut (.*);
  always #50 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    r_m = '0;
    lk_areg = '{0, 0}; alloc_areg = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // every mapped register is where the model says, and unique
      for (int r = 0; r < NR; r++) begin
        lk_areg[0] = 4'(r); #1;
        checks++;
        if (lk_mapped[0] !== r_m[r] || (r_m[r] && lk_sidx[0] !== r_s[r])) begin
          failures++;
          if (failures < 10) $display("r%0d mapped %b sidx %0d exp %b %0d", r, lk_mapped[0], lk_sidx[0], r_m[r], r_s[r]);
        end
        for (int q = 0; q < r; q++) if (r_m[r] && r_m[q] && r_s[r] == r_s[q]) begin
          failures++; $display("r%0d and r%0d share entry %0d", r, q, r_s[r]);
        end
      end
      clear       = ($urandom_range(0, 199) == 0);
      alloc_valid = $urandom_range(0, 1);
      alloc_areg  = 4'($urandom_range(0, NR-1));
      #1;
      got = alloc_sidx;
      if (alloc_valid && !clear) begin
        checks++;
        if (!alloc_ok) begin failures++; $display("allocation failed at %0d", n); end
        // the new entry must not be held by another mapped register
        for (int q = 0; q < NR; q++) if (q != alloc_areg && r_m[q] && r_s[q] == alloc_sidx) begin
          failures++; $display("entry %0d given while held by r%0d", alloc_sidx, q);
        end
      end
      @(posedge clk);
      if (clear) r_m = '0;
      else if (alloc_valid) begin r_m[alloc_areg] = 1'b1; r_s[alloc_areg] = got; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
