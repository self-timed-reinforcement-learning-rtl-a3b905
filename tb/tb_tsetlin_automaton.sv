// tb_tsetlin_automaton: 2000 random penalty/reward/inaction updates against
// a counter model of the automaton. The model keeps the state as a signed
// depth: -1..-3 for exclude states x11..x13, +1..+3 for include states
// x21..x23. A reward moves one step away from the boundary (saturating at
// +-3), a penalty one step toward it, crossing from -1 to +1 and back.
// Also checks: one-hot state, exclude output, reset state, hold without
// commit, and that boundary crossings and end-state saturation both occur.
module tb_tsetlin_automaton;
  import tm_pkg::*;
  logic clk = 0, rst_n = 0, commit = 0, p = 0, r = 0;
  ta_state_t state;
  logic exclude;
  int checks = 0, failures = 0, crossings = 0, saturations = 0;
  int depth;

  tsetlin_automaton dut (.*);

  always #5 clk = ~clk;

  function automatic ta_state_t enc(int d);
    ta_state_t s = '0;
    case (d)
      -3: s.x13 = 1; -2: s.x12 = 1; -1: s.x11 = 1;
       1: s.x21 = 1;  2: s.x22 = 1;  3: s.x23 = 1;
      default: ;
    endcase
    return s;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s depth=%0d state=%b", what, depth, state); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    depth = -1;
    @(negedge clk);
    check(state == enc(-1) && exclude, "reset state x11");
    for (int n = 0; n < 2000; n++) begin
      automatic int k = $urandom_range(2);
      @(negedge clk);
      p = (k == 1); r = (k == 2);
      commit = ($urandom_range(7) != 0);
      @(negedge clk);
      if (commit && p) begin
        if (depth == -1) begin depth = 1; crossings++; end
        else if (depth == 1) begin depth = -1; crossings++; end
        else depth = depth > 0 ? depth - 1 : depth + 1;
      end else if (commit && r) begin
        if (depth == 3 || depth == -3) saturations++;
        else depth = depth > 0 ? depth + 1 : depth - 1;
      end
      check(state == enc(depth), "state");
      check(exclude == (depth < 0), "exclude");
      commit = 0; p = 0; r = 0;
    end
    check(crossings > 0, "boundary crossing seen");
    check(saturations > 0, "saturation seen");
    $display("crossings=%0d saturations=%0d", crossings, saturations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
