// matched_delay: BEHAVIOURAL MODEL of a bundled-data delay element. Not
// synthesizable; in silicon it is a chain of delay cells sized at
// implementation to exceed the logic path it is matched to.
//
// y follows a after DELAY time units, on both edges (transport delay: every
// edge of a reappears on y). In this design it delays the request of a
// clause's p2 generator behind the tap select computed from the clause sum,
// so the selected tap has reached the sampler's latch before it is sampled.
module matched_delay #(
  parameter int DELAY = 2
) (
  input  logic a,
  output logic y
);

  initial y = 1'b0;

  always @(a) y <= #(DELAY) a;

endmodule
