// tb_sram_1r1w: writes random rows, reads them back one cycle later, and
// checks that a read of a row being written in the same cycle returns the
// old contents and that rd_data holds when rd_en is low.
module tb_sram_1r1w;
  localparam int W = 72, D = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [W-1:0] model [D];

  sram_1r1w #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] exp_v, input string what);
    checks++;
    if (rd_data !== exp_v) begin
      failures++;
      $display("%s: got %h exp %h", what, rd_data, exp_v);
    end
  endtask

  initial begin
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_data = {$urandom, $urandom, 8'(i)};
      model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    // random reads with one-cycle latency
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(0, D - 1);
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      @(negedge clk); rd_en = 0;
      check(model[a], "read");
    end
    // read-during-write returns old data, then new data
    for (int k = 0; k < 50; k++) begin
      int a;
      logic [W-1:0] nv;
      a  = $urandom_range(0, D - 1);
      nv = {$urandom, $urandom, 8'hA5};
      @(negedge clk); rd_en = 1; rd_addr = 6'(a); wr_en = 1; wr_addr = 6'(a); wr_data = nv;
      @(negedge clk); rd_en = 0; wr_en = 0;
      check(model[a], "read-during-write");
      @(negedge clk);
      check(model[a], "hold while rd_en low");
      model[a] = nv;
      rd_en = 1;
      @(negedge clk); rd_en = 0;
      check(nv, "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
