// tb_reg_file: fills the two-read-port register file with random rows and
// checks both read ports, their one-cycle latency and read-during-write
// behaviour (old data) against a model array.
module tb_reg_file;
  localparam int W = 128, D = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [4:0] wr_addr = 0, rd_addr_a = 0, rd_addr_b = 0;
  logic [W-1:0] wr_data = 0, rd_data_a, rd_data_b;
  logic [W-1:0] model [D];

  reg_file #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(i); wr_data = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 300; k++) begin
      int a, b, w;
      logic [W-1:0] nv;
      a = $urandom_range(0, D - 1);
      b = $urandom_range(0, D - 1);
      w = $urandom_range(0, D - 1);
      nv = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      rd_en = 1; rd_addr_a = 5'(a); rd_addr_b = 5'(b);
      wr_en = (k % 2 == 0); wr_addr = 5'(w); wr_data = nv;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks += 2;
      if (rd_data_a !== model[a]) begin failures++; $display("port a row %0d", a); end
      if (rd_data_b !== model[b]) begin failures++; $display("port b row %0d", b); end
      if (k % 2 == 0) model[w] = nv;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
