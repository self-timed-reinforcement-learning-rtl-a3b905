// partial_clause: the contribution of one feature to one clause, in
// dual-rail logic.
//
// A clause is the AND of the literals f and NOT f that its automata include.
// For one feature the partial clause is (f OR e0) AND (NOT f OR e1), where
// e0 excludes the literal f and e1 excludes NOT f: an excluded literal
// contributes a 1. Inversion is a swap of rails, so the block is two DR OR
// gates and one DR AND gate. It is purely combinational: the output is a
// spacer while the inputs are spacers and becomes valid once enough inputs
// are valid to decide it (for instance f = 0 with e1 = 0 gives 0 without
// waiting for e0).
//
// The decomposition into feature, e0 and e1 follows the design; the gate
// arrangement inside is this design's own, as the schematic is not given.
module partial_clause
  import tm_pkg::*;
(
  input  dr_t f,   // feature
  input  dr_t e0,  // exclude for literal f
  input  dr_t e1,  // exclude for literal NOT f
  output dr_t pc   // partial clause
);

  always_comb pc = dr_and(dr_or(f, e0), dr_or(dr_not(f), e1));

endmodule
