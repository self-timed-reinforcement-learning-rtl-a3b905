// mutex: BEHAVIOURAL MODEL of a two-way mutual exclusion element. Not
// synthesizable; the real part is a cross-coupled latch with a metastability
// filter.
//
// A request r1 or r2 is granted (g1 or g2) if the other grant is low; a
// grant is held while its request stays high, then released, after which a
// waiting request is granted. Requests that arrive together are resolved at
// random (the earlier of two requests seen in one decision
// wins). g1 and g2 are never high together. Each decision takes DELAY time
// units.
module mutex #(
  parameter int DELAY = 5
) (
  input  logic r1,
  input  logic r2,
  output logic g1,
  output logic g2
);

  // Arrival times of the requests, so that the earlier one wins even when
  // both are seen in the same decision.
  time t1, t2;
  always @(posedge r1) t1 <= $time;
  always @(posedge r2) t2 <= $time;

  initial begin
    g1 = 1'b0;
    g2 = 1'b0;
  end

  always begin
    @(r1 or r2 or g1 or g2);
    #(DELAY);
    if (!r1) g1 = 1'b0;
    if (!r2) g2 = 1'b0;
    if (r1 && r2 && !g1 && !g2) begin
      if (t1 < t2)                     g1 = 1'b1;
      else if (t2 < t1)                g2 = 1'b1;
      else if ($urandom_range(1) == 0) g1 = 1'b1;
      else                             g2 = 1'b1;
    end else if (r1 && !g2) g1 = 1'b1;
    else if (r2 && !g1)     g2 = 1'b1;
  end

  always @(g1 or g2) a_exclusive: assert (!(g1 && g2)) else $error("mutex: both grants high");

endmodule
