// tb_rcmp_unit -- exhaustive test of the RCMP decision.
// Every combination of shadowed / L1 hit / MSHR hit / slice / engine busy /
// valid is applied; the expected outcome is the flowchart written out case
// by case below.
//
// The decision table checked is the flowchart of the source design; the
// 'engine busy means delay' row is this design's own addition. Purely
// combinational; all 128 input combinations.
module tb_rcmp_unit;
  import iser_pkg::*;
  logic rcmp_valid, shadowed, l1_hit, mshr_hit, slice_valid, engine_busy;
  rcmp_dec_e decision, exp;
  logic start_recompute, delay_load;
  int checks = 0, failures = 0;

  rcmp_unit dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      {rcmp_valid, shadowed, l1_hit, mshr_hit, slice_valid, engine_busy} = 6'(v);
      #1;
      if (!shadowed)                   exp = DEC_LOAD;    // not speculative
      else if (l1_hit)                 exp = DEC_LOAD;    // shadowed hit
      else if (mshr_hit)               exp = DEC_LOAD;    // joins the miss in flight
      else if (!slice_valid)           exp = DEC_DELAY;   // no slice
      else if (engine_busy)            exp = DEC_DELAY;   // engine occupied
      else                             exp = DEC_RECOMPUTE;
      checks++;
      if (decision !== exp) begin
        failures++;
        $display("v=%b decision=%s exp=%s", v[5:0], decision.name(), exp.name());
      end
      checks++;
      if (start_recompute !== (rcmp_valid && exp == DEC_RECOMPUTE) ||
          delay_load !== (rcmp_valid && exp == DEC_DELAY)) begin
        failures++;
        $display("v=%b start=%b delay=%b", v[5:0], start_recompute, delay_load);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
