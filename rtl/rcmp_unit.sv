// rcmp_unit -- decides what an RCMP instruction does.
//
// RCMP is a load bundled with a conditional jump to the load's recomputation
// slice. The decision follows the flowchart of the source design:
//   not shadowed                     -> perform the load
//   shadowed, L1 hit                 -> perform the load
//   shadowed, L1 miss but MSHR hit   -> perform the load (it rides on the
//                                       miss already in flight)
//   shadowed, L1 miss, slice exists  -> recompute
//   shadowed, L1 miss, no slice      -> delay on miss
// "L1 miss" therefore means: block not in the L1 and no MSHR for it.
// This design's own additions: a slice only "exists" when the core marks the
// slice address valid and the single recomputation engine is free; with the
// engine busy the load is delayed, as it would be without recomputation.
//
// Purely combinational: decision is valid in the cycle rcmp_valid is high.
// start_recompute is decision==DEC_RECOMPUTE qualified by rcmp_valid.
module rcmp_unit
  import iser_pkg::*;
(
  input  logic      rcmp_valid,
  input  logic      shadowed,      // the load is under at least one shadow
  input  logic      l1_hit,        // block present in the L1 data cache
  input  logic      mshr_hit,      // an MSHR already tracks the block
  input  logic      slice_valid,   // the RCMP names a slice
  input  logic      engine_busy,   // recomputation engine occupied
  output rcmp_dec_e decision,
  output logic      start_recompute,
  output logic      delay_load
);
  always_comb begin
    if (!shadowed || l1_hit || mshr_hit) decision = DEC_LOAD;
    else if (slice_valid && !engine_busy) decision = DEC_RECOMPUTE;
    else decision = DEC_DELAY;
  end

  assign start_recompute = rcmp_valid && (decision == DEC_RECOMPUTE);
  assign delay_load      = rcmp_valid && (decision == DEC_DELAY);
endmodule
