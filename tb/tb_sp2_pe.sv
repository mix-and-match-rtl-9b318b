// tb_sp2_pe: exhaustive check of the SP2 shift-add PE with m1 = 2, m2 = 1.
// The expected product is built from the real-valued quantisation levels
// q1 = 2^-(2^m1 - c1), q2 = 2^-(2^m2 - c2) (zero codes give zero), scaled by
// 2^(2^m1 - 1) to integer units and multiplied by the activation.
module tb_sp2_pe;
  int checks = 0, failures = 0;
  logic [3:0] act, wgt;
  logic signed [7:0] prod;

  sp2_pe dut (.act, .wgt, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int w = 0; w < 16; w++) begin
        int c1, c2, expv;
        real q1, q2;
        act = 4'(a);
        wgt = 4'(w);
        #1;
        c1 = (w >> 1) & 3;
        c2 = w & 1;
        q1 = (c1 == 0) ? 0.0 : 2.0 ** (-(4 - c1));
        q2 = (c2 == 0) ? 0.0 : 2.0 ** (-(2 - c2));
        expv = int'((q1 + q2) * 8.0) * a;
        if (w >= 8) expv = -expv;
        checks++;
        if (int'(prod) != expv) begin
          failures++;
          $display("mismatch act=%0d wgt=%0h got %0d exp %0d", a, w, prod, expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
