// tb_mag_comparator: all 256 pairs of 4-bit operands; the DR output must be
// class 1 exactly when a > b. Spacers give a spacer. Early propagation: with
// the MSBs different the result must appear with all lower bits at spacer.
module tb_mag_comparator;
  import tm_pkg::*;
  localparam int W = 4;
  dr_t a [W];
  dr_t b [W];
  dr_t cls;
  int checks = 0, failures = 0;

  mag_comparator dut (.a(a), .b(b), .cls(cls));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s cls=%b", what, cls); end
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int va = 0; va < 16; va++)
      for (int vb = 0; vb < 16; vb++) begin
        for (int i = 0; i < W; i++) begin
          a[i] = dr_enc(va[i], 1'b1);
          b[i] = dr_enc(vb[i], 1'b1);
        end
        #1;
        check((cls.t ^ cls.f) && cls.t == (va > vb), $sformatf("a=%0d b=%0d", va, vb));
      end
    for (int i = 0; i < W; i++) begin a[i] = DR_SPACER; b[i] = DR_SPACER; end
    #1; check(cls == DR_SPACER, "spacer");
    a[3] = dr_enc(1'b1, 1'b1); b[3] = dr_enc(1'b0, 1'b1);
    #1; check(cls.t && !cls.f, "early class 1 from MSB");
    a[3] = dr_enc(1'b0, 1'b1); b[3] = dr_enc(1'b1, 1'b1);
    #1; check(cls.f && !cls.t, "early class 0 from MSB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
