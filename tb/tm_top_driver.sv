// tm_top_driver: stimulus, reference model and checks for a tm_top of
// any size, shared by the default-size and the wide end-to-end testbenches.
//
// It keeps its own model of every automaton (a signed depth, -1..-3 exclude,
// +1..+3 include) and, for each operation, works out the clause outputs, the
// popcount and the class from it. After each operation it checks class_out
// and sum_out, the stage-1 type, that every clause's stage-2 type is either
// the expected type (swapped on negated clauses) or stopped, and that every
// automaton's action is one the stage-3 table allows for some value of p3.
// It then applies the actions to its model and compares every automaton
// state. Every operation must finish within MAX_LAT clock cycles.
//
// Workload: N_TRAIN operations (nine in ten learning, one in ten inference
// only) on random feature vectors labelled y = f0 AND NOT f1, then N_EVAL
// inference-only operations (all inputs when NF <= 6, random ones otherwise)
// of which at least MIN_PCT percent must be classified correctly. Each
// mechanism (inference only, Type I, Type II, stopped by p2, type swap on a
// negated clause, reward, penalty, inaction, boundary crossing, end-state
// saturation, class 1, class 0) is counted and must occur. The check and
// failure counts are outputs; complete rises when the workload is done, and
// the testbench that instantiates the driver reports and ends the run.
module tm_top_driver
  import tm_pkg::*;
#(
  parameter int  NF        = 3,
  parameter int  NC        = 3,
  parameter int  SUM_W     = 4,
  parameter int  N_TRAIN   = 3000,
  parameter int  N_EVAL    = 8,
  parameter int  MIN_PCT   = 100,
  parameter int  MAX_LAT   = 40
) (
  input  logic             clk,
  output logic             rst_n,
  output logic             start,
  output logic             learn,
  output logic             yexp,
  output logic [NF-1:0]    f,
  input  logic             busy,
  input  logic             done,
  input  logic             class_out,
  input  logic [SUM_W-1:0] sum_out,
  input  fb_t              fb1_out,
  input  fb_t              fb2_out  [NC],
  input  act_t             act_out  [2*NC*NF],
  input  logic             exclude  [2*NC*NF],
  input  ta_state_t        ta_state [2*NC*NF],
  output int               checks,
  output int               failures,
  output logic             complete
);
  localparam int NTA = 2 * NC * NF, NNEG = NC / 2;

  int depth [NTA];
  typedef enum {M_INFER, M_T1, M_T2, M_P2STOP, M_SWAP, M_REWARD, M_PENALTY, M_INACTION,
                M_CROSS, M_SAT, M_CLASS1, M_CLASS0, M_NUM} mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"inference only", "Type I", "Type II", "stopped by p2",
    "swap on negated clause", "reward", "penalty", "inaction", "boundary crossing",
    "saturation", "class 1", "class 0"};

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; learn = 0; yexp = 0; f = '0;
    checks = 0; failures = 0; complete = 1'b0;
  end

  function automatic logic [NF-1:0] rand_features();
    logic [NF-1:0] v;
    for (int i = 0; i < NF; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  function automatic int ta_idx(int j, int i, int l);
    return (j * NF + i) * 2 + l;
  endfunction

  function automatic bit clause_ref(int j, logic [NF-1:0] fv);
    for (int i = 0; i < NF; i++) begin
      if (depth[ta_idx(j, i, 0)] > 0 && !fv[i]) return 0;
      if (depth[ta_idx(j, i, 1)] > 0 && fv[i]) return 0;
    end
    return 1;
  endfunction

  function automatic int dec(ta_state_t s);
    if (s.x13) return -3;
    if (s.x12) return -2;
    if (s.x11) return -1;
    if (s.x21) return 1;
    if (s.x22) return 2;
    if (s.x23) return 3;
    return 0;
  endfunction

  // Stage-3 action (0 inaction, 1 penalty, 2 reward) for one p3 value.
  function automatic int fb3_ref(int t, bit inc, bit cc, bit x, bit p);
    if (t == 1) begin
      if (inc) return cc ? (p ? 2 : 0) : (p ? 0 : 1);
      if (!cc) return p ? 0 : 2;
      if (!p) return 0;
      return x ? 1 : 2;
    end
    if (t == 2) return (!inc && cc && !x) ? 1 : 0;
    return 0;
  endfunction

  function automatic int onehot_idx(logic [2:0] v);
    case (v)
      3'b001: return 0;
      3'b010: return 1;
      3'b100: return 2;
      default: return -1;
    endcase
  endfunction

  task automatic run_op(logic [NF-1:0] fv, bit l, bit y, output bit cls);
    bit c [NC];
    int pop = 0, csum, lat = 0, t1;
    bit exp_cls;
    for (int j = 0; j < NC; j++) begin
      c[j] = clause_ref(j, fv);
      pop += (j % 2 == 1) ? int'(!c[j]) : int'(c[j]);
    end
    csum = pop - NNEG;
    exp_cls = csum > 0;
    @(negedge clk);
    f = fv; learn = l; yexp = y; start = 1;
    @(negedge clk);
    start = 0;
    while (!done && lat < MAX_LAT) begin @(negedge clk); lat++; end
    check(done, "operation completes within the latency bound");
    @(negedge clk);
    cls = class_out;
    check(class_out == exp_cls, $sformatf("class f=%b", fv));
    check(int'(sum_out) == pop, $sformatf("popcount f=%b got %0d expect %0d", fv, sum_out, pop));
    mech[class_out ? M_CLASS1 : M_CLASS0]++;
    t1 = !l ? 0 : (y ? 1 : 2);
    check(onehot_idx(fb1_out) == t1, "stage-1 type");
    if (t1 == 0) mech[M_INFER]++;
    else mech[t1 == 1 ? M_T1 : M_T2]++;
    for (int j = 0; j < NC; j++) begin
      int t2 = onehot_idx(fb2_out[j]);
      int texp = t1;
      if (j % 2 == 1 && t1 != 0) texp = 3 - t1;
      check(t2 == 0 || t2 == texp, $sformatf("stage-2 type clause %0d", j));
      if (t1 != 0 && t2 == 0) mech[M_P2STOP]++;
      if (j % 2 == 1 && t2 != 0 && t2 != t1) mech[M_SWAP]++;
      for (int i = 0; i < NF; i++)
        for (int lit = 0; lit < 2; lit++) begin
          int k = ta_idx(j, i, lit);
          int a = onehot_idx(act_out[k]);
          bit inc = depth[k] > 0;
          bit x = (lit == 0) ? fv[i] : !fv[i];
          int a0 = fb3_ref(t2 < 0 ? 0 : t2, inc, c[j], x, 1'b0);
          int a1 = fb3_ref(t2 < 0 ? 0 : t2, inc, c[j], x, 1'b1);
          check(a >= 0 && (a == a0 || a == a1), $sformatf("action ta %0d", k));
          if (a == 0) mech[M_INACTION]++;
          else if (a == 1) begin
            mech[M_PENALTY]++;
            if (depth[k] == 1 || depth[k] == -1) begin depth[k] = -depth[k]; mech[M_CROSS]++; end
            else depth[k] += (depth[k] > 0) ? -1 : 1;
          end else if (a == 2) begin
            mech[M_REWARD]++;
            if (depth[k] == 3 || depth[k] == -3) mech[M_SAT]++;
            else depth[k] += (depth[k] > 0) ? 1 : -1;
          end
        end
    end
    for (int k = 0; k < NTA; k++) begin
      check(dec(ta_state[k]) == depth[k], $sformatf("state ta %0d", k));
      check(exclude[k] == (depth[k] < 0), "exclude");
    end
  endtask

  initial begin
    bit cls;
    int correct = 0;
    for (int k = 0; k < NTA; k++) depth[k] = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N_TRAIN; n++) begin
      automatic logic [NF-1:0] fv = rand_features();
      automatic bit l = ($urandom_range(9) != 0);
      run_op(fv, l, fv[0] & !fv[1], cls);
    end
    for (int n = 0; n < N_EVAL; n++) begin
      automatic logic [NF-1:0] fv = (NF <= 6) ? NF'(n) : rand_features();
      run_op(fv, 1'b0, 1'b0, cls);
      if (cls == (fv[0] & !fv[1])) correct++;
    end
    $display("learned y = f0 & ~f1: %0d of %0d inputs correct", correct, N_EVAL);
    check(correct * 100 >= MIN_PCT * N_EVAL, "learning result");
    for (int m = 0; m < M_NUM; m++) begin
      $display("  %-24s %0d", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s occurred", mech_name[m]));
    end
    complete = 1'b1;
  end
endmodule
