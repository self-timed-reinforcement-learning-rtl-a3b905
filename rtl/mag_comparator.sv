// mag_comparator: dual-rail magnitude comparator used as the class
// threshold.
//
// A chain of W bit slices, most significant first. Each slice has inputs a,
// b and eval and outputs gt, eq and lt; the eq output of one slice is the
// eval input of the next lower slice and the top slice's eval is tied to 1.
// A slice only evaluates while its eval is high, so comparison stops at the
// first unequal bit and the result usually arrives after one or two slices.
// The class 1 rail collects every gt output, the class 0 rail every lt
// output and the eq of the least significant slice; so class 1 means a > b
// and class 0 means a <= b. Output cls is DR: cls.t = class 1, cls.f =
// class 0, spacer while a and b are spacers. Combinational.
//
// The slice ports, the eq-to-eval chain and which outputs feed each class
// are as drawn in the comparator schematic of the design (4 bits there). The
// gates inside a slice are this design's own: gt = eval & a & ~b,
// lt = eval & ~a & b, eq = eval & (a == b), each on DR rails.
module mag_comparator
  import tm_pkg::*;
#(
  parameter int W = 4
) (
  input  dr_t a [W],
  input  dr_t b [W],
  output dr_t cls
);

  logic [W:0]   eval;
  logic [W-1:0] gt, eq, lt;

  always_comb begin
    eval[W] = 1'b1;
    for (int i = W - 1; i >= 0; i--) begin
      gt[i]   = eval[i+1] & a[i].t & b[i].f;
      lt[i]   = eval[i+1] & a[i].f & b[i].t;
      eq[i]   = eval[i+1] & ((a[i].t & b[i].t) | (a[i].f & b[i].f));
      eval[i] = eq[i];
    end
    cls.t = |gt;
    cls.f = (|lt) | eq[0];
  end

endmodule
