// tb_gemm_fixed: random tiles through the fixed-point GEMM core at its
// default size (Bat=4, Blk_in=16, Blk_out=16); every output accumulator is
// compared with a dot product computed in the testbench.
module tb_gemm_fixed;
  localparam int BAT = 4, BI = 16, BO = 16, AW = 32;
  int checks = 0, failures = 0;
  logic [BAT-1:0][BI-1:0][3:0] act;
  logic [BO-1:0][BI-1:0][3:0]  wgt;
  logic [BAT-1:0][BO-1:0][AW-1:0] acc_in, acc_out;

  gemm_fixed dut (.act, .wgt, .acc_in, .acc_out);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      for (int b = 0; b < BAT; b++) for (int i = 0; i < BI; i++) act[b][i] = 4'($urandom);
      for (int o = 0; o < BO; o++) for (int i = 0; i < BI; i++) wgt[o][i] = 4'($urandom);
      for (int b = 0; b < BAT; b++) for (int o = 0; o < BO; o++)
        acc_in[b][o] = (t % 3 == 0) ? '0 : AW'($urandom_range(0, 2000) - 1000);
      #1;
      for (int b = 0; b < BAT; b++) begin
        for (int o = 0; o < BO; o++) begin
          int s;
          s = int'($signed(acc_in[b][o]));
          for (int i = 0; i < BI; i++) begin
            int w;
            w = int'(wgt[o][i] & 4'h7);
            if (wgt[o][i][3]) w = -w;
            s += w * int'(act[b][i]);
          end
          checks++;
          if (int'($signed(acc_out[b][o])) != s) begin
            failures++;
            if (failures < 10) $display("mismatch t=%0d b=%0d o=%0d got %0d exp %0d", t, b, o,
                                        $signed(acc_out[b][o]), s);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
