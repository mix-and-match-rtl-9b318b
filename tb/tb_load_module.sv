// tb_load_module: runs 2-D LOAD instructions for each buffer type against a
// DRAM model holding random data and checks every buffer row written (its
// address, its data and that no other buffer is written). It also checks
// that an instruction with pop_next waits for a compute token and that
// push_next returns one when the instruction completes.
module tb_load_module;
  import msq_pkg::*;
  localparam int MAX_ROW = 2048;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready;
  insn_t q_insn;
  logic tok_from_cp = 0, tok_from_cp_pop, tok_to_cp_push;
  logic req_valid, req_ready, resp_valid, resp_last;
  logic [31:0] req_addr;
  logic [7:0]  req_len;
  logic [63:0] resp_data;
  logic wr_inp, wr_wgt_fix, wr_wgt_sp2, wr_idx_fix, wr_idx_sp2;
  logic [15:0] wr_addr;
  logic [MAX_ROW-1:0] wr_data;
  logic busy;
  logic [31:0] wait_cycles;
  int pushes = 0, pops = 0, writes = 0;
  logic [MAX_ROW-1:0] buf_row [5][64];
  logic               buf_vld [5][64];

  load_module dut (.*);
  dram_model #(.DEPTH(8192)) u_dram (.clk, .rst_n, .req_valid, .req_ready, .req_addr,
    .req_len, .resp_valid, .resp_data, .resp_last, .wr_valid(1'b0), .wr_ready(),
    .wr_addr('0), .wr_data('0), .wr_strb('0));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    logic [4:0] en;
    en = {wr_idx_sp2, wr_idx_fix, wr_wgt_sp2, wr_wgt_fix, wr_inp};
    if ($countones(en) > 1) failures++;
    for (int t = 0; t < 5; t++) if (en[t]) begin
      buf_row[t][wr_addr % 64] = wr_data;
      buf_vld[t][wr_addr % 64] = 1'b1;
      writes++;
    end
    if (tok_to_cp_push) pushes++;
    if (tok_from_cp_pop) pops++;
  end

  function automatic int beats_of(int t);
    case (t)
      0: return 4;    // 4 x 16 x 4 bits
      1: return 16;   // 16 x 16 x 4 bits
      2: return 32;   // 32 x 16 x 4 bits
      3: return 4;    // 16 x 16-bit indices
      default: return 8;
    endcase
  endfunction

  task automatic run_load(int t, int sram, int dram, int ys, int xs, int xstr, bit pop, bit push);
    mem_insn_t m;
    m = '0;
    m.mem_type = mem_e'(t); m.sram_base = 16'(sram); m.dram_base = 32'(dram);
    m.y_size = 16'(ys); m.x_size = 16'(xs); m.x_stride = 16'(xstr);
    q_insn = '0;
    q_insn.opcode = OP_LOAD;
    q_insn.dep.pop_next = pop;
    q_insn.dep.push_next = push;
    q_insn.payload = PAYLOAD_W'(m);
    for (int i = 0; i < 64; i++) buf_vld[t][i] = 1'b0;
    @(negedge clk) q_valid = 1;
    do @(posedge clk); while (!q_ready);
    @(negedge clk) q_valid = 0;
    for (int y = 0; y < ys; y++) for (int x = 0; x < xs; x++) begin
      logic [MAX_ROW-1:0] exp_row;
      int bt, r;
      bt = beats_of(t);
      exp_row = '0;
      for (int k = 0; k < bt; k++) exp_row[k*64 +: 64] = u_dram.mem[dram + (y*xstr + x)*bt + k];
      r = sram + y*xs + x;
      checks++;
      if (!buf_vld[t][r] || buf_row[t][r] !== exp_row) begin
        failures++;
        $display("type %0d row %0d wrong or missing", t, r);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 8192; i++) u_dram.mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5; t++) run_load(t, 2 + t, 40 * t, 2, 3, 5, 0, 0);
    checks++;
    if (writes != 30) begin failures++; $display("writes %0d", writes); end
    // token handshake: the load must wait until a compute token arrives
    fork
      run_load(0, 10, 700, 1, 4, 4, 1, 1);
      begin
        repeat (30) @(posedge clk);
        checks++;
        if (writes != 30) begin failures++; $display("load started without token"); end
        @(negedge clk) tok_from_cp = 1;
        do @(posedge clk); while (!tok_from_cp_pop);
        @(negedge clk) tok_from_cp = 0;
      end
    join
    checks++;
    if (pops != 1 || pushes != 1 || wait_cycles < 25) begin
      failures++;
      $display("tokens: pops %0d pushes %0d wait %0d", pops, pushes, wait_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
