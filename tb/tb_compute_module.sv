// tb_compute_module: drives the compute module at its default sizes with a
// short program: load micro-ops, clear partial sums, accumulate a 3-step
// reduction per output row on both cores (consecutive steps hit the same
// row, so the bypass is used), run a two-micro-op GEMM, then requantise,
// ReLU and max-pool with the tensor ALU and FINISH. Input and weight
// buffers are testbench arrays with one-cycle read latency. Every output
// buffer row written is compared with a model computed in the testbench
// from the fixed-point and SP2 weight levels. It also checks that a GEMM
// with pop_prev waits for a load token, and that the 12-step reduction
// retires one step per cycle.
module tb_compute_module;
  import msq_pkg::*;
  localparam int BAT = 4, BI = 16, BOF = 16, BOS = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic q_valid = 0, q_ready;
  insn_t q_insn;
  logic tok_from_ld = 0, tok_from_ld_pop, tok_from_st = 0, tok_from_st_pop;
  logic tok_to_ld_push, tok_to_st_push;
  logic req_valid, req_ready, resp_valid, resp_last;
  logic [31:0] req_addr;
  logic [7:0]  req_len;
  logic [63:0] resp_data;
  logic inp_rd_en, wgt_rd_en;
  logic [8:0] inp_rd_addr, wgt_rd_addr;
  logic [255:0]  inp_rd_data;
  logic [1023:0] wgt_fix_rd_data;
  logic [2047:0] wgt_sp2_rd_data;
  logic out_fix_wr_en, out_sp2_wr_en;
  logic [7:0] out_wr_addr;
  logic [255:0] out_fix_wr_data;
  logic [511:0] out_sp2_wr_data;
  logic busy, finish;
  logic [31:0] gemm_steps, alu_steps, fwd_count, wait_cycles;

  compute_module dut (.*);
  dram_model #(.DEPTH(1024)) u_dram (.clk, .rst_n, .req_valid, .req_ready, .req_addr,
    .req_len, .resp_valid, .resp_data, .resp_last, .wr_valid(1'b0), .wr_ready(),
    .wr_addr('0), .wr_data('0), .wr_strb('0));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- buffer models ----------------
  logic [255:0]  inp_mem [32];
  logic [1023:0] wf_mem  [8];
  logic [2047:0] ws_mem  [8];
  logic [255:0]  of_mem  [256];
  logic [511:0]  os_mem  [256];
  int            of_wr [256], os_wr [256];
  always @(posedge clk) begin
    if (inp_rd_en) inp_rd_data <= inp_mem[inp_rd_addr % 32];
    if (wgt_rd_en) begin
      wgt_fix_rd_data <= wf_mem[wgt_rd_addr % 8];
      wgt_sp2_rd_data <= ws_mem[wgt_rd_addr % 8];
    end
    if (out_fix_wr_en) begin of_mem[out_wr_addr] <= out_fix_wr_data; of_wr[out_wr_addr]++; end
    if (out_sp2_wr_en) begin os_mem[out_wr_addr] <= out_sp2_wr_data; os_wr[out_wr_addr]++; end
  end

  // ---------------- reference model ----------------
  int accf [8][BAT][BOF];
  int accs [8][BAT][BOS];

  function automatic int act_of(int row, int b, int i);
    return int'(inp_mem[row][(b*BI + i)*4 +: 4]);
  endfunction
  function automatic int wfix(int row, int o, int i);
    logic [3:0] w;
    w = wf_mem[row][(o*BI + i)*4 +: 4];
    return w[3] ? -int'(w[2:0]) : int'(w[2:0]);
  endfunction
  function automatic int wsp2(int row, int o, int i);
    logic [3:0] w;
    int v;
    w = ws_mem[row][(o*BI + i)*4 +: 4];
    v = ((w[2:1] == 0) ? 0 : (1 << (int'(w[2:1]) - 1))) + (w[0] ? 4 : 0);
    return w[3] ? -v : v;
  endfunction
  task automatic ref_gemm(int a, int ir, int wr, bit rst);
    for (int b = 0; b < BAT; b++) begin
      for (int o = 0; o < BOF; o++) begin
        int s;
        s = rst ? 0 : accf[a][b][o];
        if (!rst) for (int i = 0; i < BI; i++) s += act_of(ir, b, i) * wfix(wr, o, i);
        accf[a][b][o] = s;
      end
      for (int o = 0; o < BOS; o++) begin
        int s;
        s = rst ? 0 : accs[a][b][o];
        if (!rst) for (int i = 0; i < BI; i++) s += act_of(ir, b, i) * wsp2(wr, o, i);
        accs[a][b][o] = s;
      end
    end
  endtask
  function automatic int clip(int v);
    return (v < 0) ? 0 : (v > 15) ? 15 : v;
  endfunction
  task automatic check_out(int row, bit fix, bit sp2);
    for (int b = 0; b < BAT; b++) begin
      if (fix) for (int o = 0; o < BOF; o++) begin
        checks++;
        if (int'(of_mem[row][(b*BOF + o)*4 +: 4]) != clip(accf[row][b][o])) begin
          failures++;
          if (failures < 10) $display("fix row %0d b %0d o %0d got %0d exp %0d (acc %0d)", row, b, o,
                                      of_mem[row][(b*BOF + o)*4 +: 4], clip(accf[row][b][o]), accf[row][b][o]);
        end
      end
      if (sp2) for (int o = 0; o < BOS; o++) begin
        checks++;
        if (int'(os_mem[row][(b*BOS + o)*4 +: 4]) != clip(accs[row][b][o])) begin
          failures++;
          if (failures < 10) $display("sp2 row %0d b %0d o %0d got %0d exp %0d", row, b, o,
                                      os_mem[row][(b*BOS + o)*4 +: 4], clip(accs[row][b][o]));
        end
      end
    end
  endtask

  // ---------------- instruction helpers ----------------
  task automatic issue(insn_t i);
    q_insn = i;
    @(negedge clk) q_valid = 1;
    do @(posedge clk); while (!q_ready);
    @(negedge clk) q_valid = 0;
  endtask
  function automatic insn_t gemm(bit rst, int bgn, int en, int io, int ii,
                                 int af0, int af1, int if0, int if1, int wf0, int wf1);
    gemm_insn_t g;
    insn_t i;
    g = '0;
    g.reset = rst; g.uop_bgn = 12'(bgn); g.uop_end = 12'(en);
    g.iter_out = 12'(io); g.iter_in = 12'(ii);
    g.acc_f0 = 12'(af0); g.acc_f1 = 12'(af1); g.inp_f0 = 12'(if0); g.inp_f1 = 12'(if1);
    g.wgt_f0 = 12'(wf0); g.wgt_f1 = 12'(wf1);
    i = '0; i.opcode = OP_GEMM; i.payload = PAYLOAD_W'(g);
    return i;
  endfunction
  function automatic insn_t alu(alu_op_e op, bit ui, int imm, int bgn, int en, int io,
                                int df0, int sf0, logic [1:0] mask);
    alu_insn_t a;
    insn_t i;
    a = '0;
    a.op = op; a.use_imm = ui; a.imm = 16'(imm); a.uop_bgn = 12'(bgn); a.uop_end = 12'(en);
    a.iter_out = 12'(io); a.iter_in = 12'd1; a.dst_f0 = 12'(df0); a.src_f0 = 12'(sf0);
    a.core_mask = mask;
    i = '0; i.opcode = OP_ALU; i.payload = PAYLOAD_W'(a);
    return i;
  endfunction

  function automatic logic [31:0] uop(int a, int ip, int w);
    uop_t u;
    u.acc_idx = 10'(a); u.inp_idx = 11'(ip); u.wgt_idx = 11'(w);
    return u;
  endfunction

  initial begin
    insn_t i;
    mem_insn_t m;
    int t0, steps0;
    for (int r = 0; r < 32; r++) inp_mem[r] = {8{$urandom}};
    for (int r = 0; r < 8; r++) begin
      wf_mem[r] = {32{$urandom}};
      ws_mem[r] = {64{$urandom}};
    end
    // micro-ops in DRAM words 0..3
    u_dram.mem[0] = {32'hFFFF_FFFF, uop(0, 0, 0)};
    u_dram.mem[1] = {32'h0, uop(4, 20, 5)};
    u_dram.mem[2] = {32'h0, uop(5, 21, 6)};
    u_dram.mem[3] = {32'h0, uop(1, 0, 0)};      // ALU: dst 1 ... pooling uses dst 0, src 1
    repeat (3) @(negedge clk);
    rst_n = 1;

    // LOAD UOP
    m = '0; m.mem_type = MEM_UOP; m.sram_base = 16'd0; m.dram_base = 32'd0; m.x_size = 16'd4;
    i = '0; i.opcode = OP_LOAD; i.payload = PAYLOAD_W'(m);
    issue(i);

    // clear rows 0..3, then rows 4,5
    issue(gemm(1, 0, 1, 4, 1, 1, 0, 0, 0, 0, 0));
    for (int r = 0; r < 4; r++) ref_gemm(r, 0, 0, 1);
    issue(gemm(1, 1, 3, 1, 1, 0, 0, 0, 0, 0, 0));
    ref_gemm(4, 0, 0, 1); ref_gemm(5, 0, 0, 1);

    // reduction: row r += sum_k I[r + 4k] x W[k], k < 3, waits for a load token
    i = gemm(0, 0, 1, 4, 3, 1, 0, 1, 4, 0, 1);
    i.dep.pop_prev = 1'b1;
    fork
      issue(i);
      begin
        repeat (20) @(posedge clk);
        checks++;
        if (gemm_steps != 6) begin failures++; $display("GEMM ran without token"); end
        @(negedge clk) tok_from_ld = 1;
        do @(posedge clk); while (!tok_from_ld_pop);
        @(negedge clk) tok_from_ld = 0;
        t0 = $time; steps0 = gemm_steps;
      end
    join
    for (int r = 0; r < 4; r++) for (int k = 0; k < 3; k++) ref_gemm(r, r + 4*k, k, 0);
    // 12 steps at one per cycle plus pipeline fill and the instruction handshake
    checks++;
    if (($time - t0) / 10 > 12 + 6) begin failures++; $display("rate: %0d cycles", ($time - t0) / 10); end
    $display("12-step reduction took %0d cycles", ($time - t0) / 10);
    checks++;
    if (gemm_steps - steps0 != 12) begin failures++; $display("steps %0d", gemm_steps - steps0); end
    // two micro-ops: rows 4, 5
    issue(gemm(0, 1, 3, 1, 1, 0, 0, 0, 0, 0, 0));
    ref_gemm(4, 20, 5, 0); ref_gemm(5, 21, 6, 0);
    checks++;
    if (fwd_count < 8) begin failures++; $display("bypass used %0d times", fwd_count); end

    // requantise: fixed core >>> 2, SP2 core >>> 3 (rows 0..5 via uop 0, dst_f0 = 1)
    issue(alu(ALU_SHR, 1, 2, 0, 1, 6, 1, 0, 2'b01));
    issue(alu(ALU_SHR, 1, 3, 0, 1, 6, 1, 0, 2'b10));
    for (int r = 0; r < 6; r++) for (int b = 0; b < BAT; b++) begin
      for (int o = 0; o < BOF; o++) accf[r][b][o] = accf[r][b][o] >>> 2;
      for (int o = 0; o < BOS; o++) accs[r][b][o] = accs[r][b][o] >>> 3;
    end
    for (int r = 0; r < 6; r++) check_out(r, 1, 1);
    // ReLU on both cores
    issue(alu(ALU_MAX, 1, 0, 0, 1, 6, 1, 0, 2'b11));
    for (int r = 0; r < 6; r++) for (int b = 0; b < BAT; b++) begin
      for (int o = 0; o < BOF; o++) if (accf[r][b][o] < 0) accf[r][b][o] = 0;
      for (int o = 0; o < BOS; o++) if (accs[r][b][o] < 0) accs[r][b][o] = 0;
    end
    for (int r = 0; r < 6; r++) check_out(r, 1, 1);
    // 2x1 max pool with micro-op 3 (dst 1, src 0): R[1] = max(R[1], R[0])
    issue(alu(ALU_MAX, 0, 0, 3, 4, 1, 0, 0, 2'b11));
    for (int b = 0; b < BAT; b++) begin
      for (int o = 0; o < BOF; o++) accf[1][b][o] = (accf[0][b][o] > accf[1][b][o]) ? accf[0][b][o] : accf[1][b][o];
      for (int o = 0; o < BOS; o++) accs[1][b][o] = (accs[0][b][o] > accs[1][b][o]) ? accs[0][b][o] : accs[1][b][o];
    end
    check_out(1, 1, 1);
    // FINISH
    i = '0; i.opcode = OP_FINISH;
    fork
      issue(i);
      begin
        do @(posedge clk); while (!finish);
        checks++;
      end
    join
    $display("gemm steps %0d alu steps %0d bypass %0d", gemm_steps, alu_steps, fwd_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
