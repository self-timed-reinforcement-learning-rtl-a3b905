// tb_fb3_ta: stage-3 feedback over every combination of fb2 type, inc, c,
// x and p3 (48 cases). The expected action is looked up in a copy of the
// design's truth table (rows with don't-cares), written as data here; the
// one row the table omits (Type II, inc=0, c=1, x=1) is expected as
// inaction. Also: spacer in -> spacer out, and T0 -> inaction with every
// other input at spacer.
module tb_fb3_ta;
  import tm_pkg::*;
  fb_t  fb2;
  dr_t  inc, c, x, p3;
  act_t act;
  int checks = 0, failures = 0;

  fb3_ta dut (.fb2(fb2), .inc(inc), .c(c), .x(x), .p3(p3), .act(act));

  // Table rows: type, inc, c, x, p3 (-1 = don't care), action (0 inaction,
  // 1 penalty, 2 reward).
  typedef struct { int t, inc, c, x, p, a; } row_t;
  row_t rows [16] = '{
    '{0, -1, -1, -1, -1, 0},
    '{1, 1, 0, -1, 0, 1}, '{1, 1, 0, -1, 1, 0},
    '{1, 1, 1, -1, 0, 0}, '{1, 1, 1, -1, 1, 2},
    '{1, 0, 0, -1, 0, 2}, '{1, 0, 0, -1, 1, 0},
    '{1, 0, 1, 0, 0, 0},  '{1, 0, 1, 0, 1, 2},
    '{1, 0, 1, 1, 0, 0},  '{1, 0, 1, 1, 1, 1},
    '{2, 1, -1, -1, -1, 0},
    '{2, 0, 1, 0, -1, 1},
    '{2, 0, 0, -1, -1, 0},
    '{2, 0, 1, 1, -1, 0},   // not in the table: inaction assumed
    '{-9, 0, 0, 0, 0, 0}
  };

  function automatic bit m(int field, int v);
    return field == -1 || field == v;
  endfunction

  function automatic int lookup(int t, int i, int cc, int xx, int p);
    foreach (rows[r])
      if (rows[r].t == t && m(rows[r].inc, i) && m(rows[r].c, cc) && m(rows[r].x, xx)
          && m(rows[r].p, p))
        return rows[r].a;
    return -1;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s act=%b", what, act); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++)
      for (int v = 0; v < 16; v++) begin
        int e;
        fb2 = fb_t'(3'b001 << t);
        inc = dr_enc(v[0], 1'b1);
        c   = dr_enc(v[1], 1'b1);
        x   = dr_enc(v[2], 1'b1);
        p3  = dr_enc(v[3], 1'b1);
        #1;
        e = lookup(t, v[0], v[1], v[2], v[3]);
        check(e >= 0 && act == act_t'(3'b001 << e),
              $sformatf("t=%0d inc=%0d c=%0d x=%0d p3=%0d expect %0d", t, v[0], v[1], v[2], v[3], e));
      end
    fb2 = '0; inc = DR_SPACER; c = DR_SPACER; x = DR_SPACER; p3 = DR_SPACER; #1;
    check(act == '0, "spacer");
    fb2 = fb_t'(3'b001); #1;
    check(act == act_t'(3'b001), "T0 gives inaction at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
