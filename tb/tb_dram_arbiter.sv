// tb_dram_arbiter: three requesters issue random bursts at the same time
// through the arbiter to a DRAM model whose word i holds a known pattern.
// Each requester checks that it receives exactly its own beats, in order,
// and every requester must be served (round-robin, no starvation).
module tb_dram_arbiter;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0]        m_req_valid, m_req_ready, m_resp_valid;
  logic [N-1:0][31:0]  m_req_addr;
  logic [N-1:0][7:0]   m_req_len;
  logic [63:0]         m_resp_data;
  logic                m_resp_last;
  logic s_req_valid, s_req_ready, s_resp_valid, s_resp_last;
  logic [31:0] s_req_addr;
  logic [7:0]  s_req_len;
  logic [63:0] s_resp_data;
  int served [N];

  dram_arbiter #(.N(N)) dut (.*);
  dram_model #(.DEPTH(4096), .LAT(3)) u_dram (
    .clk, .rst_n, .req_valid(s_req_valid), .req_ready(s_req_ready), .req_addr(s_req_addr),
    .req_len(s_req_len), .resp_valid(s_resp_valid), .resp_data(s_resp_data),
    .resp_last(s_resp_last), .wr_valid(1'b0), .wr_ready(), .wr_addr('0), .wr_data('0),
    .wr_strb('0)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar m = 0; m < N; m++) begin : g_m
    initial begin
      m_req_valid[m] = 1'b0;
      m_req_addr[m]  = '0;
      m_req_len[m]   = '0;
      served[m]      = 0;
      wait (rst_n);
      for (int k = 0; k < 40; k++) begin
        int a, l, got;
        a = $urandom_range(0, 4000);
        l = $urandom_range(1, 8);
        @(negedge clk);
        m_req_valid[m] = 1'b1; m_req_addr[m] = 32'(a); m_req_len[m] = 8'(l);
        do @(posedge clk); while (!m_req_ready[m]);
        @(negedge clk) m_req_valid[m] = 1'b0;
        got = 0;
        while (got < l) begin
          @(posedge clk);
          if (m_resp_valid[m]) begin
            checks++;
            if (m_resp_data != {32'hD0D0_0000, 32'(a + got)} || m_resp_last != (got == l - 1)) begin
              failures++;
              $display("master %0d beat %0d wrong data %h", m, got, m_resp_data);
            end
            got++;
          end
        end
        served[m]++;
      end
    end
  end

  // no beat ever goes to two requesters
  always @(posedge clk) if (rst_n && $countones(m_resp_valid) > 1) failures++;

  initial begin
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = {32'hD0D0_0000, 32'(i)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (served[0] == 40 && served[1] == 40 && served[2] == 40);
    for (int m = 0; m < N; m++) begin
      checks++;
      if (served[m] != 40) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
