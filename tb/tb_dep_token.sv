// tb_dep_token: random push/pop traffic on a dependency-token queue; the
// token count and the avail/full flags are compared with a counter model.
module tb_dep_token;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic avail, full;
  int model = 0;

  dep_token #(.CNT_W(3)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      checks++;
      if (avail !== (model != 0) || full !== (model == 7)) begin
        failures++;
        $display("cycle %0d count %0d avail %0b full %0b", k, model, avail, full);
      end
      push = !full && ($urandom_range(0, 99) < ((k / 500) % 2 ? 30 : 70));
      pop  = avail && ($urandom_range(0, 99) < 50);
      model = model + int'(push) - int'(pop);
    end
    @(negedge clk); push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
