// tb_msq_top: end-to-end run of the accelerator at its default sizes
// (Bat=4, Blk_in=16, Blk_out,fixed=16, Blk_out,sp2=32) on one 1x1
// convolution layer: 32 input channels, 48 filters, 4 pixels x 4 images.
// The 48 filters are split at random between the schemes: 16 go to the
// fixed-point core and 32 to the SP2 core (the 1:2 ratio), and the index
// buffers hold their global numbers. The testbench writes activations,
// weights, indices, micro-ops and the instruction stream into a DRAM model,
// starts the accelerator and, at done, compares every output activation in
// DRAM with relu(sum >> shift) clipped to 4 bits, computed here from the
// fixed-point and SP2 weight levels. It counts and requires the mechanisms
// the run must use: fetch stalls on a full queue, token waits in compute
// and store, the partial-sum bypass, DRAM arbitration conflicts, write
// back-pressure, and per-core ALU operations.
module tb_msq_top;
  import msq_pkg::*;
  localparam int BAT = 4, BI = 16, BOF = 16, BOS = 32;
  localparam int CIN = 32, NCB = CIN / BI, NPIX = 4, NCH = BOF + BOS;
  localparam int SH_FIX = 3, SH_SP2 = 4;
  localparam int INP_BASE = 1000, WF_BASE = 2000, WS_BASE = 2100, IF_BASE = 2200,
                 IS_BASE = 2210, UOP_BASE = 2300, OUT_BASE = 3000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic req_valid, req_ready, resp_valid, resp_last;
  logic [31:0] req_addr;
  logic [7:0]  req_len;
  logic [63:0] resp_data;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  logic [63:0] wr_data;
  logic [15:0] wr_strb;
  logic [31:0] fetch_stall_cycles, load_wait_cycles, compute_wait_cycles, store_wait_cycles;
  logic [31:0] gemm_steps, alu_steps, fwd_count;
  int n_insn = 0;

  msq_top dut (
    .clk, .rst_n, .start, .insn_addr(32'd0), .insn_count(16'(n_insn)), .busy, .done,
    .dram_req_valid(req_valid), .dram_req_ready(req_ready), .dram_req_addr(req_addr),
    .dram_req_len(req_len), .dram_resp_valid(resp_valid), .dram_resp_data(resp_data),
    .dram_resp_last(resp_last), .dram_wr_valid(wr_valid), .dram_wr_ready(wr_ready),
    .dram_wr_addr(wr_addr), .dram_wr_data(wr_data), .dram_wr_strb(wr_strb),
    .fetch_stall_cycles, .load_wait_cycles, .compute_wait_cycles, .store_wait_cycles,
    .gemm_steps, .alu_steps, .fwd_count
  );
  dram_model #(.DEPTH(8192)) u_dram (.clk, .rst_n, .req_valid, .req_ready, .req_addr,
    .req_len, .resp_valid, .resp_data, .resp_last, .wr_valid, .wr_ready, .wr_addr,
    .wr_data, .wr_strb);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int arb_conflicts = 0, wr_stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.m_req_valid) > 1) arb_conflicts++;
    if (wr_valid && !wr_ready) wr_stalls++;
  end

  // ---------------- layer data ----------------
  int act [NPIX][BAT][CIN];
  int wq  [NCH][CIN];        // 4-bit weight code of global filter g
  bit is_sp2 [NCH];
  int perm [NCH];            // local slot -> global filter (fixed 0..15, SP2 16..47)

  function automatic int level(int code, bit sp2);
    int v;
    if (sp2) v = (((code >> 1) & 3) == 0 ? 0 : (1 << (((code >> 1) & 3) - 1))) + ((code & 1) ? 4 : 0);
    else     v = code & 7;
    return (code & 8) ? -v : v;
  endfunction

  task automatic put_insn(insn_t i);
    u_dram.mem[2*n_insn]     = i[63:0];
    u_dram.mem[2*n_insn + 1] = i[127:64];
    n_insn++;
  endtask
  function automatic insn_t mk_load(mem_e t, int sram, int dram, int ys, int xs, int xstr,
                                    bit pop_next, bit push_next);
    mem_insn_t m;
    insn_t i;
    m = '0; m.mem_type = t; m.sram_base = 16'(sram); m.dram_base = 32'(dram);
    m.y_size = 16'(ys); m.x_size = 16'(xs); m.x_stride = 16'(xstr);
    i = '0; i.opcode = OP_LOAD; i.payload = PAYLOAD_W'(m);
    i.dep.pop_next = pop_next; i.dep.push_next = push_next;
    return i;
  endfunction
  function automatic insn_t mk_gemm(bit rst, int io, int ii, int af0, int if0, int if1, int wf1);
    gemm_insn_t g;
    insn_t i;
    g = '0; g.reset = rst; g.uop_bgn = 12'd0; g.uop_end = 12'd1;
    g.iter_out = 12'(io); g.iter_in = 12'(ii); g.acc_f0 = 12'(af0);
    g.inp_f0 = 12'(if0); g.inp_f1 = 12'(if1); g.wgt_f1 = 12'(wf1);
    i = '0; i.opcode = OP_GEMM; i.payload = PAYLOAD_W'(g);
    return i;
  endfunction
  function automatic insn_t mk_alu(alu_op_e op, int imm, logic [1:0] mask);
    alu_insn_t a;
    insn_t i;
    a = '0; a.op = op; a.use_imm = 1'b1; a.imm = 16'(imm); a.uop_bgn = 12'd0; a.uop_end = 12'd1;
    a.iter_out = 12'(NPIX); a.iter_in = 12'd1; a.dst_f0 = 12'd1; a.core_mask = mask;
    i = '0; i.opcode = OP_ALU; i.payload = PAYLOAD_W'(a);
    return i;
  endfunction
  function automatic insn_t mk_store(int core, int idx_row);
    store_insn_t s;
    insn_t i;
    s = '0; s.core = 4'(core); s.sram_base = 16'd0; s.dram_base = 32'(OUT_BASE * 16);
    s.n_rows = 16'(NPIX); s.idx_row = 16'(idx_row); s.n_pix = 16'(NPIX); s.pix0 = 16'd0;
    i = '0; i.opcode = OP_STORE; i.payload = PAYLOAD_W'(s);
    return i;
  endfunction

  initial begin
    insn_t i;
    uop_t u;
    for (int w = 0; w < 8192; w++) u_dram.mem[w] = '0;
    // random layer
    for (int p = 0; p < NPIX; p++) for (int b = 0; b < BAT; b++) for (int c = 0; c < CIN; c++)
      act[p][b][c] = $urandom_range(0, 15);
    for (int g = 0; g < NCH; g++) begin
      perm[g] = g;
      for (int c = 0; c < CIN; c++) wq[g][c] = $urandom_range(0, 15);
    end
    for (int g = NCH - 1; g > 0; g--) begin
      int j, t;
      j = $urandom_range(0, g);
      t = perm[g]; perm[g] = perm[j]; perm[j] = t;
    end
    for (int s = 0; s < NCH; s++) is_sp2[perm[s]] = (s >= BOF);

    // activations: row (cb, p) = 4 words, word b holds channels cb*16 .. cb*16+15
    for (int cb = 0; cb < NCB; cb++) for (int p = 0; p < NPIX; p++) for (int b = 0; b < BAT; b++)
      for (int c = 0; c < BI; c++)
        u_dram.mem[INP_BASE + (cb*NPIX + p)*BAT + b][c*4 +: 4] = 4'(act[p][b][cb*BI + c]);
    // weights: row cb of each core holds [local filter][16 input channels]
    for (int cb = 0; cb < NCB; cb++) begin
      for (int o = 0; o < BOF; o++) for (int c = 0; c < BI; c++) begin
        int bit_pos;
        bit_pos = (o*BI + c) * 4;
        u_dram.mem[WF_BASE + cb*16 + bit_pos/64][bit_pos%64 +: 4] = 4'(wq[perm[o]][cb*BI + c]);
      end
      for (int o = 0; o < BOS; o++) for (int c = 0; c < BI; c++) begin
        int bit_pos;
        bit_pos = (o*BI + c) * 4;
        u_dram.mem[WS_BASE + cb*32 + bit_pos/64][bit_pos%64 +: 4] = 4'(wq[perm[BOF + o]][cb*BI + c]);
      end
    end
    // filter indices
    for (int o = 0; o < BOF; o++) u_dram.mem[IF_BASE + o/4][(o%4)*16 +: 16] = 16'(perm[o]);
    for (int o = 0; o < BOS; o++) u_dram.mem[IS_BASE + o/4][(o%4)*16 +: 16] = 16'(perm[BOF + o]);
    // one micro-op: acc 0, inp 0, wgt 0
    u = '0;
    u_dram.mem[UOP_BASE] = {32'h0, u};

    // ---------------- program ----------------
    put_insn(mk_load(MEM_UOP, 0, UOP_BASE, 1, 1, 1, 0, 0));
    put_insn(mk_load(MEM_INP, 0, INP_BASE, 1, NCB*NPIX, NCB*NPIX, 0, 0));
    put_insn(mk_load(MEM_WGT_FIX, 0, WF_BASE, 1, NCB, NCB, 0, 0));
    put_insn(mk_load(MEM_WGT_SP2, 0, WS_BASE, 1, NCB, NCB, 0, 0));
    put_insn(mk_load(MEM_IDX_FIX, 0, IF_BASE, 1, 1, 1, 0, 0));
    put_insn(mk_load(MEM_IDX_SP2, 0, IS_BASE, 1, 1, 1, 0, 1));            // -> compute token
    i = mk_gemm(1, NPIX, 1, 1, 0, 0, 0); i.dep.pop_prev = 1; put_insn(i);  // wait for data
    put_insn(mk_gemm(0, NPIX, NCB, 1, 1, NPIX, 1));                      // accumulate
    put_insn(mk_alu(ALU_SHR, SH_FIX, 2'b01));                             // fixed core only
    put_insn(mk_alu(ALU_SHR, SH_SP2, 2'b10));                             // SP2 core only
    i = mk_alu(ALU_MAX, 0, 2'b11); i.dep.push_next = 1; put_insn(i);     // ReLU -> store token
    i = mk_store(0, 0); i.dep.pop_prev = 1; put_insn(i);
    i = mk_store(1, 0); i.dep.push_prev = 1; put_insn(i);                 // -> compute token
    i = '0; i.opcode = OP_FINISH; i.dep.pop_next = 1; put_insn(i);        // after the stores

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    repeat (5) @(posedge clk);

    // ---------------- check outputs ----------------
    for (int g = 0; g < NCH; g++) for (int p = 0; p < NPIX; p++) for (int b = 0; b < BAT; b++) begin
      int s, e, got;
      s = 0;
      for (int c = 0; c < CIN; c++) s += act[p][b][c] * level(wq[g][c], is_sp2[g]);
      s = s >>> (is_sp2[g] ? SH_SP2 : SH_FIX);
      e = (s < 0) ? 0 : (s > 15) ? 15 : s;
      got = int'(u_dram.mem[OUT_BASE + ((g/16)*NPIX + p)*BAT + b][(g%16)*4 +: 4]);
      checks++;
      if (got != e) begin
        failures++;
        if (failures < 10) $display("filter %0d (%s) pixel %0d batch %0d: got %0d exp %0d",
                                    g, is_sp2[g] ? "sp2" : "fixed", p, b, got, e);
      end
    end
    // ---------------- mechanisms ----------------
    $display("fetch stalls %0d, compute token waits %0d, store token waits %0d",
             fetch_stall_cycles, compute_wait_cycles, store_wait_cycles);
    $display("bypass %0d, arbitration conflicts %0d, write stalls %0d, gemm steps %0d, alu steps %0d",
             fwd_count, arb_conflicts, wr_stalls, gemm_steps, alu_steps);
    checks++; if (fetch_stall_cycles == 0)  begin failures++; $display("no fetch stall"); end
    checks++; if (compute_wait_cycles == 0) begin failures++; $display("no compute token wait"); end
    checks++; if (store_wait_cycles == 0)   begin failures++; $display("no store token wait"); end
    checks++; if (fwd_count == 0)           begin failures++; $display("no bypass"); end
    checks++; if (arb_conflicts == 0)       begin failures++; $display("no arbitration conflict"); end
    checks++; if (wr_stalls == 0)           begin failures++; $display("no write stall"); end
    checks++; if (gemm_steps != NPIX + NPIX*NCB) begin failures++; $display("gemm steps"); end
    checks++; if (alu_steps != 3*NPIX)      begin failures++; $display("alu steps"); end
    checks++; if (busy)                     begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
