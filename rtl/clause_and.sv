// clause_and: the partial clause combiner, a dual-rail AND over the partial
// clauses of one clause column.
//
// True rail: AND of all true rails. False rail: OR of all false rails, so the
// clause output resolves to 0 as soon as any one partial clause is 0, while a
// 1 waits for every input (the slow arc through the positive rail). The
// output is a spacer when all inputs are spacers. Combinational; N is the
// number of features.
module clause_and
  import tm_pkg::*;
#(
  parameter int N = 3
) (
  input  dr_t pc [N],
  output dr_t c
);

  always_comb begin
    c = pc[0];
    for (int i = 1; i < N; i++) c = dr_and(c, pc[i]);
  end

endmodule
