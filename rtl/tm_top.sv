// tm_top: a single-class, self-timed Tsetlin machine with on-line learning.
//
// The machine classifies a vector of N_FEATURES binary features with
// N_CLAUSES clauses. Clause j is the AND of the literals (f_i and NOT f_i)
// that its automata include; even clauses vote for the class, odd
// (negated) clauses against it. The votes are counted by a dual-rail
// popcount and the count is held against a threshold by a magnitude
// comparator: class 1 when the signed sum (positive minus negated votes) is
// above 0. With learn = 1 the same pass also computes three stages of
// feedback (machine, clause, automaton) and updates all
// 2 * N_CLAUSES * N_FEATURES automata.
//
// Structure: a grid of clause_tile instances (features in rows, clauses in
// columns), a clause_and per column, one dr_popcount and one mag_comparator,
// one fb1_tm, a sum_tile per column (stage-2 feedback with its own random
// bit generator), one random bit generator per automaton for stage 3, and
// the ta_array that stores the automata. All datapath values are dual-rail
// and pass spacer -> valid -> spacer; tm_ctrl sequences that four-phase
// cycle from completion detection on the outputs (the class bit, every
// automaton action and, for the return to spacer, the random bits).
//
// Interface (single-rail, synchronous to clk): pulse start with f, learn and
// yexp set (yexp is the expected class, used when learn = 1); busy stays high
// until done pulses. class_out, sum_out (the popcount, equal to csum +
// N_CLAUSES/2), fb1_out, fb2_out and act_out (the last actions given) are
// valid from done until the next start. exclude/ta_state read the automata
// (automaton index (j*N_FEATURES + i)*2 + l, l = 0 for f_i, 1 for NOT f_i).
//
// Follows the design: the datapath blocks, the feedback equations and
// table, the probability of p2 and the p3 bias (s-1)/s, the one-hot
// automaton. This design's own choices: clocked sequencing in place of
// matched delays, the sizes T and S, reset to the exclude state next to the
// boundary, and the threshold at csum > 0.
module tm_top
  import tm_pkg::*;
#(
  parameter int  N_FEATURES = 3,
  parameter int  N_CLAUSES  = 3,
  parameter int  SUM_W      = 4,
  parameter int  T          = 2,
  parameter real S          = 3.9,
  parameter int  RO_PERIOD  = 997
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      learn,
  input  logic      yexp,
  input  logic [N_FEATURES-1:0] f,
  output logic      busy,
  output logic      done,
  output logic      class_out,
  output logic [SUM_W-1:0] sum_out,
  output fb_t       fb1_out,
  output fb_t       fb2_out   [N_CLAUSES],
  output act_t      act_out   [2*N_CLAUSES*N_FEATURES],
  output logic      exclude   [2*N_CLAUSES*N_FEATURES],
  output ta_state_t ta_state  [2*N_CLAUSES*N_FEATURES]
);

  localparam int N_TA  = 2 * N_CLAUSES * N_FEATURES;
  localparam int N_NEG = N_CLAUSES / 2;
  localparam int P3_PM = int'(1000.0 * (S - 1.0) / S);
  // Comparator threshold: popcount > N_NEG  <=>  csum > 0.
  localparam logic [SUM_W-1:0] THRESH = SUM_W'(N_NEG);

  initial begin
    assert (N_CLAUSES >= 2) else $error("tm_top: need at least one negated clause");
    assert (2 ** SUM_W > N_CLAUSES) else $error("tm_top: SUM_W too small");
  end

  // ---------------------------------------------------------------- control
  logic go, ro_en, capture, commit, all_valid, all_spacer;
  logic [N_FEATURES-1:0] f_q;
  logic learn_q, yexp_q;

  tm_ctrl u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start && !busy),
    .learn     (learn),
    .all_valid (all_valid),
    .all_spacer(all_spacer),
    .go        (go),
    .ro_en     (ro_en),
    .capture   (capture),
    .commit    (commit),
    .busy      (busy),
    .done      (done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_q     <= '0;
      learn_q <= 1'b0;
      yexp_q  <= 1'b0;
    end else if (start && !busy) begin
      f_q     <= f;
      learn_q <= learn;
      yexp_q  <= yexp;
    end
  end

  // ------------------------------------------------------ dual-rail inputs
  dr_t f_dr [N_FEATURES];
  dr_t learn_dr, yexp_dr;
  dr_t thresh_dr [SUM_W];

  always_comb begin
    for (int i = 0; i < N_FEATURES; i++) f_dr[i] = dr_enc(f_q[i], go);
    for (int k = 0; k < SUM_W; k++) thresh_dr[k] = dr_enc(THRESH[k], go);
    learn_dr = dr_enc(learn_q, go);
    yexp_dr  = dr_enc(yexp_q, go);
  end

  // ------------------------------------------------------------ inference
  dr_t  pc   [N_CLAUSES][N_FEATURES];
  dr_t  c    [N_CLAUSES];
  dr_t  vote [N_CLAUSES];
  dr_t  sum  [SUM_W];
  dr_t  cls;
  fb_t  fb1;
  fb_t  fb2  [N_CLAUSES];
  dr_t  p2   [N_CLAUSES];
  dr_t  p3   [N_TA];
  act_t act  [N_TA];

  for (genvar j = 0; j < N_CLAUSES; j++) begin : g_clause
    localparam bit CNEG = (j % 2) == 1;

    for (genvar i = 0; i < N_FEATURES; i++) begin : g_feat
      localparam int TA0 = (j * N_FEATURES + i) * 2;
      clause_tile u_tile (
        .go  (go),
        .f   (f_dr[i]),
        .excl('{exclude[TA0], exclude[TA0+1]}),
        .c   (c[j]),
        .fb2 (fb2[j]),
        .p3  ('{p3[TA0], p3[TA0+1]}),
        .pc  (pc[j][i]),
        .act ('{act[TA0], act[TA0+1]})
      );
    end

    clause_and #(.N(N_FEATURES)) u_and (
      .pc(pc[j]),
      .c (c[j])
    );

    assign vote[j] = CNEG ? dr_not(c[j]) : c[j];

    sum_tile #(
      .CNEG  (CNEG),
      .W     (SUM_W),
      .T     (T),
      .N_NEG (N_NEG),
      .PERIOD(RO_PERIOD + 2 * j)
    ) u_sum (
      .ro_en(ro_en),
      .sum  (sum),
      .fb1  (fb1),
      .p2   (p2[j]),
      .fb2  (fb2[j])
    );
  end

  dr_popcount #(.N(N_CLAUSES), .W(SUM_W)) u_popcount (
    .x(vote),
    .y(sum)
  );

  mag_comparator #(.W(SUM_W)) u_cmp (
    .a  (sum),
    .b  (thresh_dr),
    .cls(cls)
  );

  // ------------------------------------------------------------- learning
  fb1_tm u_fb1 (
    .learn(learn_dr),
    .yexp (yexp_dr),
    .fb1  (fb1)
  );

  for (genvar k = 0; k < N_TA; k++) begin : g_p3
    prbg #(
      .NTAPS     (1),
      .DUTY_LO_PM(P3_PM),
      .DUTY_HI_PM(P3_PM),
      .PERIOD    (RO_PERIOD + 2 * N_CLAUSES + 2 * k)
    ) u_p3 (
      .en (ro_en),
      .sel(1'b0),
      .req(go),
      .ack(p3[k])
    );
  end

  ta_array #(.N_TA(N_TA)) u_tas (
    .clk    (clk),
    .rst_n  (rst_n),
    .act    (act),
    .capture(capture),
    .commit (commit),
    .exclude(exclude),
    .state  (ta_state),
    .act_q  (act_out)
  );

  // ---------------------------------------------------- completion detect
  always_comb begin
    all_valid  = dr_valid(cls);
    all_spacer = (cls == DR_SPACER);
    for (int k = 0; k < N_TA; k++) begin
      all_valid  = all_valid & act_valid(act[k]);
      all_spacer = all_spacer & !act_valid(act[k]) & (p3[k] == DR_SPACER);
    end
    for (int j = 0; j < N_CLAUSES; j++) all_spacer = all_spacer & (p2[j] == DR_SPACER);
    for (int kk = 0; kk < SUM_W; kk++) all_spacer = all_spacer & (sum[kk] == DR_SPACER);
  end

  // -------------------------------------------------------------- results
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_out <= 1'b0;
      sum_out   <= '0;
      fb1_out   <= '0;
      for (int j = 0; j < N_CLAUSES; j++) fb2_out[j] <= '0;
    end else if (capture) begin
      class_out <= cls.t;
      for (int kk = 0; kk < SUM_W; kk++) sum_out[kk] <= sum[kk].t;
      fb1_out <= fb1;
      for (int j = 0; j < N_CLAUSES; j++) fb2_out[j] <= fb2[j];
    end
  end

endmodule
