// clause_tile: one feature row of one clause column.
//
// Holds the partial clause calculation for feature f and the stage-3
// feedback of the tile's two automata: automaton 0 decides on literal f,
// automaton 1 on literal NOT f. The automata themselves live in the shared
// ta_array; their exclude bits (single-rail, stable during a data phase)
// are turned into dual-rail values here by the data-phase signal go, so
// they follow the four-phase protocol of the rest of the datapath.
//
// Inputs f, c (the finished clause output of the column), fb2 (the column's
// stage-2 feedback) and p3 (one random bit per automaton) are dual-rail or
// one-hot; outputs pc (to the column's AND) and act (one action per
// automaton) go to spacer with them. Combinational.
//
// The tile's contents follow the design's clause tile; moving the two
// automata out of the tile into one array follows its bundled-data grouping.
module clause_tile
  import tm_pkg::*;
(
  input  logic go,
  input  dr_t  f,
  input  logic excl [2],
  input  dr_t  c,
  input  fb_t  fb2,
  input  dr_t  p3   [2],
  output dr_t  pc,
  output act_t act  [2]
);

  dr_t e_dr [2];
  dr_t x    [2];

  always_comb begin
    e_dr[0] = dr_enc(excl[0], go);
    e_dr[1] = dr_enc(excl[1], go);
    x[0]    = f;
    x[1]    = dr_not(f);
  end

  partial_clause u_pc (
    .f (f),
    .e0(e_dr[0]),
    .e1(e_dr[1]),
    .pc(pc)
  );

  for (genvar l = 0; l < 2; l++) begin : g_fb3
    fb3_ta u_fb3 (
      .fb2(fb2),
      .inc(dr_not(e_dr[l])),
      .c  (c),
      .x  (x[l]),
      .p3 (p3[l]),
      .act(act[l])
    );
  end

endmodule
