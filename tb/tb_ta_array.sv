// tb_ta_array: four automata behind one controller. Actions are presented,
// captured, then changed on the inputs before commit: the automata must
// move by the captured action, not the later one, and must not move on
// capture alone. A counter model as in tb_tsetlin_automaton checks states.
module tb_ta_array;
  import tm_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0, capture = 0, commit = 0;
  act_t act [N];
  logic exclude [N];
  ta_state_t state [N];
  act_t act_q [N];
  int checks = 0, failures = 0;
  int depth [N];
  int kind [N];

  ta_array #(.N_TA(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic int step(int d, int k);
    if (k == 1) begin
      if (d == -1) return 1;
      if (d == 1) return -1;
      return d > 0 ? d - 1 : d + 1;
    end
    if (k == 2) begin
      if (d == 3 || d == -3) return d;
      return d > 0 ? d + 1 : d - 1;
    end
    return d;
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

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin act[i] = act_t'(3'b001); depth[i] = -1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        kind[i] = $urandom_range(2);
        act[i]  = act_t'(3'b001 << kind[i]);
      end
      capture = 1;
      @(negedge clk);
      capture = 0;
      for (int i = 0; i < N; i++) begin
        check(dec(state[i]) == depth[i], "no move on capture");
        act[i] = act_t'(3'b001 << $urandom_range(2));   // later, unrelated action
      end
      commit = 1;
      @(negedge clk);
      commit = 0;
      for (int i = 0; i < N; i++) begin
        depth[i] = step(depth[i], kind[i]);
        check(dec(state[i]) == depth[i], $sformatf("ta %0d state", i));
        check(exclude[i] == (depth[i] < 0), "exclude");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
