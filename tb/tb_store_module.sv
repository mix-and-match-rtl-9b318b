// tb_store_module: fills model output and index buffers with random
// activations and a random filter permutation, runs one STORE for the fixed
// core and one for the SP2 core against a DRAM model that stalls writes at
// random, and checks that every activation lands in the channel-blocked
// DRAM layout at its global filter position and that nothing else is
// written. It also checks the compute -> store token wait.
module tb_store_module;
  import msq_pkg::*;
  localparam int BAT = 4, BI = 16, BOF = 16, BOS = 32, NCH = 48, NPIX = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready;
  insn_t q_insn;
  logic tok_from_cp = 0, tok_from_cp_pop, tok_to_cp_push;
  logic out_rd_en, idx_rd_en;
  logic [7:0] out_rd_addr;
  logic [5:0] idx_rd_addr;
  logic [255:0] out_fix_rd_data;
  logic [511:0] out_sp2_rd_data;
  logic [255:0] idx_fix_rd_data;
  logic [511:0] idx_sp2_rd_data;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  logic [63:0] wr_data;
  logic [15:0] wr_strb;
  logic busy;
  logic [31:0] wait_cycles;
  logic dummy_req_ready, dummy_resp_valid, dummy_resp_last;
  logic [63:0] dummy_resp_data;

  store_module dut (.*);
  dram_model #(.DEPTH(4096)) u_dram (.clk, .rst_n, .req_valid(1'b0), .req_ready(dummy_req_ready),
    .req_addr('0), .req_len('0), .resp_valid(dummy_resp_valid), .resp_data(dummy_resp_data),
    .resp_last(dummy_resp_last), .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [255:0] of_mem [8];
  logic [511:0] os_mem [8];
  logic [255:0] if_mem [2];
  logic [511:0] is_mem [2];
  int perm [NCH];
  int nwrites = 0;
  always @(posedge clk) begin
    if (out_rd_en) begin
      out_fix_rd_data <= of_mem[out_rd_addr % 8];
      out_sp2_rd_data <= os_mem[out_rd_addr % 8];
    end
    if (idx_rd_en) begin
      idx_fix_rd_data <= if_mem[idx_rd_addr % 2];
      idx_sp2_rd_data <= is_mem[idx_rd_addr % 2];
    end
    if (wr_valid && wr_ready) begin
      nwrites++;
      if ($countones(wr_strb) != 1) failures++;
    end
  end

  // activation of global channel ch, pixel p, batch b as stored in DRAM
  // (base 0x100 words): block of 16 channels -> NPIX pixels -> BAT -> 16 nibbles
  function automatic int dram_act(int ch, int p, int b);
    int word;
    word = 32'h100 + ((ch / 16) * NPIX + p) * BAT + b;
    return int'(u_dram.mem[word][(ch % 16)*4 +: 4]);
  endfunction

  task automatic run_store(int core, int row0, int nrows, int idxrow, int pix0, bit pop);
    store_insn_t s;
    s = '0;
    s.core = 4'(core); s.sram_base = 16'(row0); s.dram_base = 32'h100 * 16;
    s.n_rows = 16'(nrows); s.idx_row = 16'(idxrow); s.n_pix = 16'(NPIX); s.pix0 = 16'(pix0);
    q_insn = '0;
    q_insn.opcode = OP_STORE;
    q_insn.dep.pop_prev = pop;
    q_insn.dep.push_prev = 1'b1;
    q_insn.payload = PAYLOAD_W'(s);
    @(negedge clk) q_valid = 1;
    do @(posedge clk); while (!q_ready);
    @(negedge clk) q_valid = 0;
  endtask

  initial begin
    int pushes;
    // random permutation of 48 global channels: first 16 to fixed, rest to SP2
    for (int c = 0; c < NCH; c++) perm[c] = c;
    for (int c = NCH - 1; c > 0; c--) begin
      int j, t;
      j = $urandom_range(0, c);
      t = perm[c]; perm[c] = perm[j]; perm[j] = t;
    end
    for (int c = 0; c < BOF; c++) if_mem[1][c*16 +: 16] = 16'(perm[c]);
    for (int c = 0; c < BOS; c++) is_mem[0][c*16 +: 16] = 16'(perm[BOF + c]);
    if_mem[0] = '0; is_mem[1] = '0;
    for (int r = 0; r < 8; r++) begin
      of_mem[r] = {8{$urandom}};
      os_mem[r] = {16{$urandom}};
    end
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    pushes = 0;
    fork
      run_store(0, 2, 3, 1, 1, 1);       // fixed rows 2..4 -> pixels 1..3
      begin
        repeat (20) @(posedge clk);
        checks++;
        if (nwrites != 0) begin failures++; $display("store ran without token"); end
        @(negedge clk) tok_from_cp = 1;
        do @(posedge clk); while (!tok_from_cp_pop);
        @(negedge clk) tok_from_cp = 0;
      end
    join
    run_store(1, 5, 2, 0, 3, 0);         // SP2 rows 5..6 -> pixels 3..4
    repeat (5) @(posedge clk);
    checks++;
    if (nwrites != 3*BAT*BOF + 2*BAT*BOS) begin failures++; $display("writes %0d", nwrites); end
    for (int p = 0; p < NPIX; p++) for (int b = 0; b < BAT; b++) for (int c = 0; c < NCH; c++) begin
      int e;
      e = 0;
      if (c < BOF && p >= 1 && p <= 3) e = int'(of_mem[2 + p - 1][(b*BOF + c)*4 +: 4]);
      if (c >= BOF && p >= 3)          e = int'(os_mem[5 + p - 3][(b*BOS + c - BOF)*4 +: 4]);
      checks++;
      if (dram_act(perm[c], p, b) != e) begin
        failures++;
        if (failures < 10) $display("pixel %0d batch %0d local %0d global %0d: got %0d exp %0d",
                                    p, b, c, perm[c], dram_act(perm[c], p, b), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
