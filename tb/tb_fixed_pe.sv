// tb_fixed_pe: exhaustive check of the fixed-point multiplier. Every 4-bit
// activation is multiplied by every 4-bit sign-magnitude weight and compared
// with the signed integer product worked out in the testbench.
module tb_fixed_pe;
  int checks = 0, failures = 0;
  logic [3:0] act, wgt;
  logic signed [7:0] prod;

  fixed_pe dut (.act, .wgt, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++) begin
      for (int w = 0; w < 16; w++) begin
        int expv;
        act = 4'(a);
        wgt = 4'(w);
        #1;
        expv = (w & 7) * a;
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
