// tb_fb2_clause: stage-2 feedback for a normal and a negated clause, every
// stage-1 type and p2 value, against the design's case list; also the spacer
// and T0 passing through without p2.
module tb_fb2_clause;
  import tm_pkg::*;
  fb_t fb1, fb2_pos, fb2_neg;
  dr_t p2;
  int checks = 0, failures = 0;

  fb2_clause #(.CNEG(1'b0)) dut_pos (.fb1(fb1), .p2(p2), .fb2(fb2_pos));
  fb2_clause #(.CNEG(1'b1)) dut_neg (.fb1(fb1), .p2(p2), .fb2(fb2_neg));

  // Expected type index (0, 1, 2) from the case list.
  function automatic int expect_type(int t1, bit p, bit neg);
    if (t1 == 0) return 0;
    if (t1 == 1 && !p) return 0;
    if (t1 == 2 && p) return 0;
    if (neg) return (t1 == 2) ? 1 : 2;
    return t1;
  endfunction

  function automatic fb_t onehot(int t);
    return fb_t'(3'b001 << t);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s pos=%b neg=%b", what, fb2_pos, fb2_neg); end
  endtask

  initial begin
    #1000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++)
      for (int p = 0; p < 2; p++) begin
        fb1 = onehot(t);
        p2  = dr_enc(p[0], 1'b1);
        #1;
        check(fb2_pos == onehot(expect_type(t, p[0], 0)), $sformatf("pos t=%0d p=%0d", t, p));
        check(fb2_neg == onehot(expect_type(t, p[0], 1)), $sformatf("neg t=%0d p=%0d", t, p));
      end
    fb1 = '0; p2 = DR_SPACER; #1;
    check(fb2_pos == '0 && fb2_neg == '0, "spacer");
    fb1 = onehot(0); #1;
    check(fb2_pos == onehot(0) && fb2_neg == onehot(0), "T0 without p2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
