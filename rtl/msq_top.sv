// msq_top: mixed-scheme quantisation (MSQ) DNN accelerator.
//
// A VTA-style decoupled accelerator with two heterogeneous GEMM cores: the
// fixed-point core multiplies activations by 4-bit fixed-point weights (DSP
// multipliers) and the SP2 core by 4-bit sum-of-power-of-2 weights (two
// shifters and an adder, LUTs). Each filter (weight-matrix row) of a layer is
// assigned to one of the two schemes offline; both cores then work on the
// same broadcast activation tile in parallel, each with its own weight
// buffer, register file, output buffer and filter-index buffer.
//
// Host interface: write the instruction stream into DRAM, set insn_addr
// (64-bit word address) and insn_count, pulse start; done rises when the
// compute module reaches FINISH and stays high until the next start. The
// DRAM read port carries burst requests (address, length in beats) answered
// by in-order beats; the DRAM write port writes one 64-bit word with a
// per-nibble strobe. Observation counters report stalls, bypasses and steps.
// Blocks: instruction fetch -> three instruction queues -> load, compute,
// store, synchronised by four dependency-token queues (load<->compute,
// compute<->store). The organisation and the buffer set are those of the
// paper's architecture figure; the queues, tokens, DRAM ports and instruction
// format are this design's, following the VTA design the paper extends.
// Default sizes are the paper's XC7Z045 optimum: Bat=4, Blk_in=16,
// Blk_out,fixed=16, Blk_out,sp2=32 (fixed:SP2 = 1:2).
module msq_top
  import msq_pkg::*;
#(
  parameter int unsigned BAT         = BAT_D,
  parameter int unsigned BLK_IN      = BLK_IN_D,
  parameter int unsigned BLK_OUT_FIX = BLK_OUT_FIX_D,
  parameter int unsigned BLK_OUT_SP2 = BLK_OUT_SP2_D,
  parameter int unsigned ACT_W       = ACT_W_D,
  parameter int unsigned WGT_W       = WGT_W_D,
  parameter int unsigned M1          = M1_D,
  parameter int unsigned M2          = M2_D,
  parameter int unsigned ACC_W       = ACC_W_D,
  parameter int unsigned INP_DEPTH   = INP_DEPTH_D,
  parameter int unsigned WGT_DEPTH   = WGT_DEPTH_D,
  parameter int unsigned ACC_DEPTH   = ACC_DEPTH_D,
  parameter int unsigned UOP_DEPTH   = UOP_DEPTH_D,
  parameter int unsigned IDX_DEPTH   = IDX_DEPTH_D,
  parameter int unsigned AW          = DRAM_AW_D,
  parameter int unsigned DW          = DRAM_W_D,
  parameter int unsigned LW          = 8,
  localparam int unsigned NPW        = DW / ACT_W
) (
  input  logic           clk,
  input  logic           rst_n,
  // host control
  input  logic           start,
  input  logic [AW-1:0]  insn_addr,
  input  logic [15:0]    insn_count,
  output logic           busy,
  output logic           done,
  // DRAM read port
  output logic           dram_req_valid,
  input  logic           dram_req_ready,
  output logic [AW-1:0]  dram_req_addr,
  output logic [LW-1:0]  dram_req_len,
  input  logic           dram_resp_valid,
  input  logic [DW-1:0]  dram_resp_data,
  input  logic           dram_resp_last,
  // DRAM write port
  output logic           dram_wr_valid,
  input  logic           dram_wr_ready,
  output logic [AW-1:0]  dram_wr_addr,
  output logic [DW-1:0]  dram_wr_data,
  output logic [NPW-1:0] dram_wr_strb,
  // observation counters
  output logic [31:0]    fetch_stall_cycles,
  output logic [31:0]    load_wait_cycles,
  output logic [31:0]    compute_wait_cycles,
  output logic [31:0]    store_wait_cycles,
  output logic [31:0]    gemm_steps,
  output logic [31:0]    alu_steps,
  output logic [31:0]    fwd_count
);
  localparam int unsigned INP_ROW = BAT * BLK_IN * ACT_W;
  localparam int unsigned WF_ROW  = BLK_OUT_FIX * BLK_IN * WGT_W;
  localparam int unsigned WS_ROW  = BLK_OUT_SP2 * BLK_IN * WGT_W;
  localparam int unsigned OF_ROW  = BAT * BLK_OUT_FIX * ACT_W;
  localparam int unsigned OS_ROW  = BAT * BLK_OUT_SP2 * ACT_W;
  localparam int unsigned IF_ROW  = BLK_OUT_FIX * IDX_W;
  localparam int unsigned IS_ROW  = BLK_OUT_SP2 * IDX_W;
  localparam int unsigned MAX_ROW = (WS_ROW > WF_ROW ? (WS_ROW > INP_ROW ? WS_ROW : INP_ROW)
                                                     : (WF_ROW > INP_ROW ? WF_ROW : INP_ROW));
  localparam int unsigned IAW = $clog2(INP_DEPTH);
  localparam int unsigned WAW = $clog2(WGT_DEPTH);
  localparam int unsigned RAW = $clog2(ACC_DEPTH);
  localparam int unsigned XAW = (IDX_DEPTH > 1) ? $clog2(IDX_DEPTH) : 1;

  // ---------------- DRAM read arbitration ----------------
  logic [2:0]          m_req_valid, m_req_ready, m_resp_valid;
  logic [2:0][AW-1:0]  m_req_addr;
  logic [2:0][LW-1:0]  m_req_len;
  logic [DW-1:0]       m_resp_data;
  logic                m_resp_last;

  dram_arbiter #(.N(3), .AW(AW), .DW(DW), .LW(LW)) u_arb (
    .clk, .rst_n,
    .m_req_valid, .m_req_ready, .m_req_addr, .m_req_len,
    .m_resp_valid, .m_resp_data, .m_resp_last,
    .s_req_valid (dram_req_valid), .s_req_ready(dram_req_ready),
    .s_req_addr  (dram_req_addr),  .s_req_len  (dram_req_len),
    .s_resp_valid(dram_resp_valid), .s_resp_data(dram_resp_data),
    .s_resp_last (dram_resp_last)
  );

  // ---------------- instruction fetch and queues ----------------
  insn_t f_insn, ld_insn, cp_insn, st_insn;
  logic  f_ld_valid, f_ld_ready, f_cp_valid, f_cp_ready, f_st_valid, f_st_ready;
  logic  ld_q_valid, ld_q_ready, cp_q_valid, cp_q_ready, st_q_valid, st_q_ready;
  logic  f_busy;

  fetch_module #(.AW(AW), .DW(DW), .LW(LW)) u_fetch (
    .clk, .rst_n, .start, .insn_addr, .insn_count,
    .busy(f_busy), .stall_cycles(fetch_stall_cycles),
    .req_valid(m_req_valid[0]), .req_ready(m_req_ready[0]),
    .req_addr(m_req_addr[0]), .req_len(m_req_len[0]),
    .resp_valid(m_resp_valid[0]), .resp_data(m_resp_data), .resp_last(m_resp_last),
    .ld_valid(f_ld_valid), .ld_ready(f_ld_ready),
    .cp_valid(f_cp_valid), .cp_ready(f_cp_ready),
    .st_valid(f_st_valid), .st_ready(f_st_ready),
    .insn(f_insn)
  );

  sync_fifo #(.WIDTH(INSN_W), .DEPTH(4)) u_ld_q (
    .clk, .rst_n, .in_valid(f_ld_valid), .in_ready(f_ld_ready), .in_data(f_insn),
    .out_valid(ld_q_valid), .out_ready(ld_q_ready), .out_data(ld_insn)
  );
  sync_fifo #(.WIDTH(INSN_W), .DEPTH(4)) u_cp_q (
    .clk, .rst_n, .in_valid(f_cp_valid), .in_ready(f_cp_ready), .in_data(f_insn),
    .out_valid(cp_q_valid), .out_ready(cp_q_ready), .out_data(cp_insn)
  );
  sync_fifo #(.WIDTH(INSN_W), .DEPTH(4)) u_st_q (
    .clk, .rst_n, .in_valid(f_st_valid), .in_ready(f_st_ready), .in_data(f_insn),
    .out_valid(st_q_valid), .out_ready(st_q_ready), .out_data(st_insn)
  );

  // ---------------- dependency tokens ----------------
  logic l2c_push, l2c_pop, l2c_avail;
  logic c2l_push, c2l_pop, c2l_avail;
  logic c2s_push, c2s_pop, c2s_avail;
  logic s2c_push, s2c_pop, s2c_avail;

  dep_token u_l2c (.clk, .rst_n, .push(l2c_push), .pop(l2c_pop), .avail(l2c_avail), .full());
  dep_token u_c2l (.clk, .rst_n, .push(c2l_push), .pop(c2l_pop), .avail(c2l_avail), .full());
  dep_token u_c2s (.clk, .rst_n, .push(c2s_push), .pop(c2s_pop), .avail(c2s_avail), .full());
  dep_token u_s2c (.clk, .rst_n, .push(s2c_push), .pop(s2c_pop), .avail(s2c_avail), .full());

  // ---------------- load ----------------
  logic               l_wr_inp, l_wr_wf, l_wr_ws, l_wr_if, l_wr_is;
  logic [15:0]        l_wr_addr;
  logic [MAX_ROW-1:0] l_wr_data;
  logic               l_busy;

  load_module #(.BAT(BAT), .BLK_IN(BLK_IN), .BLK_OUT_FIX(BLK_OUT_FIX),
                .BLK_OUT_SP2(BLK_OUT_SP2), .ACT_W(ACT_W), .WGT_W(WGT_W),
                .AW(AW), .DW(DW), .LW(LW)) u_load (
    .clk, .rst_n,
    .q_valid(ld_q_valid), .q_ready(ld_q_ready), .q_insn(ld_insn),
    .tok_from_cp(c2l_avail), .tok_from_cp_pop(c2l_pop), .tok_to_cp_push(l2c_push),
    .req_valid(m_req_valid[1]), .req_ready(m_req_ready[1]),
    .req_addr(m_req_addr[1]), .req_len(m_req_len[1]),
    .resp_valid(m_resp_valid[1]), .resp_data(m_resp_data), .resp_last(m_resp_last),
    .wr_inp(l_wr_inp), .wr_wgt_fix(l_wr_wf), .wr_wgt_sp2(l_wr_ws),
    .wr_idx_fix(l_wr_if), .wr_idx_sp2(l_wr_is),
    .wr_addr(l_wr_addr), .wr_data(l_wr_data),
    .busy(l_busy), .wait_cycles(load_wait_cycles)
  );

  // ---------------- on-chip buffers ----------------
  logic               inp_rd_en, wgt_rd_en;
  logic [IAW-1:0]     inp_rd_addr;
  logic [WAW-1:0]     wgt_rd_addr;
  logic [INP_ROW-1:0] inp_rd_data;
  logic [WF_ROW-1:0]  wf_rd_data;
  logic [WS_ROW-1:0]  ws_rd_data;
  logic               of_wr_en, os_wr_en, out_rd_en, idx_rd_en;
  logic [RAW-1:0]     out_wr_addr, out_rd_addr;
  logic [OF_ROW-1:0]  of_wr_data, of_rd_data;
  logic [OS_ROW-1:0]  os_wr_data, os_rd_data;
  logic [XAW-1:0]     idx_rd_addr;
  logic [IF_ROW-1:0]  if_rd_data;
  logic [IS_ROW-1:0]  is_rd_data;

  sram_1r1w #(.WIDTH(INP_ROW), .DEPTH(INP_DEPTH)) u_input_buffer (
    .clk, .wr_en(l_wr_inp), .wr_addr(IAW'(l_wr_addr)), .wr_data(l_wr_data[INP_ROW-1:0]),
    .rd_en(inp_rd_en), .rd_addr(inp_rd_addr), .rd_data(inp_rd_data)
  );
  sram_1r1w #(.WIDTH(WF_ROW), .DEPTH(WGT_DEPTH)) u_weight_buffer_fixed (
    .clk, .wr_en(l_wr_wf), .wr_addr(WAW'(l_wr_addr)), .wr_data(l_wr_data[WF_ROW-1:0]),
    .rd_en(wgt_rd_en), .rd_addr(wgt_rd_addr), .rd_data(wf_rd_data)
  );
  sram_1r1w #(.WIDTH(WS_ROW), .DEPTH(WGT_DEPTH)) u_weight_buffer_sp2 (
    .clk, .wr_en(l_wr_ws), .wr_addr(WAW'(l_wr_addr)), .wr_data(l_wr_data[WS_ROW-1:0]),
    .rd_en(wgt_rd_en), .rd_addr(wgt_rd_addr), .rd_data(ws_rd_data)
  );
  sram_1r1w #(.WIDTH(IF_ROW), .DEPTH(IDX_DEPTH)) u_index_buffer_fixed (
    .clk, .wr_en(l_wr_if), .wr_addr(XAW'(l_wr_addr)), .wr_data(l_wr_data[IF_ROW-1:0]),
    .rd_en(idx_rd_en), .rd_addr(idx_rd_addr), .rd_data(if_rd_data)
  );
  sram_1r1w #(.WIDTH(IS_ROW), .DEPTH(IDX_DEPTH)) u_index_buffer_sp2 (
    .clk, .wr_en(l_wr_is), .wr_addr(XAW'(l_wr_addr)), .wr_data(l_wr_data[IS_ROW-1:0]),
    .rd_en(idx_rd_en), .rd_addr(idx_rd_addr), .rd_data(is_rd_data)
  );
  sram_1r1w #(.WIDTH(OF_ROW), .DEPTH(ACC_DEPTH)) u_output_buffer_fixed (
    .clk, .wr_en(of_wr_en), .wr_addr(out_wr_addr), .wr_data(of_wr_data),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(of_rd_data)
  );
  sram_1r1w #(.WIDTH(OS_ROW), .DEPTH(ACC_DEPTH)) u_output_buffer_sp2 (
    .clk, .wr_en(os_wr_en), .wr_addr(out_wr_addr), .wr_data(os_wr_data),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(os_rd_data)
  );

  // ---------------- compute ----------------
  logic c_busy, c_finish;

  compute_module #(.BAT(BAT), .BLK_IN(BLK_IN), .BLK_OUT_FIX(BLK_OUT_FIX),
                   .BLK_OUT_SP2(BLK_OUT_SP2), .ACT_W(ACT_W), .WGT_W(WGT_W),
                   .M1(M1), .M2(M2), .ACC_W(ACC_W), .INP_DEPTH(INP_DEPTH),
                   .WGT_DEPTH(WGT_DEPTH), .ACC_DEPTH(ACC_DEPTH), .UOP_DEPTH(UOP_DEPTH),
                   .AW(AW), .DW(DW), .LW(LW)) u_compute (
    .clk, .rst_n,
    .q_valid(cp_q_valid), .q_ready(cp_q_ready), .q_insn(cp_insn),
    .tok_from_ld(l2c_avail), .tok_from_ld_pop(l2c_pop),
    .tok_from_st(s2c_avail), .tok_from_st_pop(s2c_pop),
    .tok_to_ld_push(c2l_push), .tok_to_st_push(c2s_push),
    .req_valid(m_req_valid[2]), .req_ready(m_req_ready[2]),
    .req_addr(m_req_addr[2]), .req_len(m_req_len[2]),
    .resp_valid(m_resp_valid[2]), .resp_data(m_resp_data), .resp_last(m_resp_last),
    .inp_rd_en, .inp_rd_addr, .inp_rd_data,
    .wgt_rd_en, .wgt_rd_addr, .wgt_fix_rd_data(wf_rd_data), .wgt_sp2_rd_data(ws_rd_data),
    .out_fix_wr_en(of_wr_en), .out_sp2_wr_en(os_wr_en), .out_wr_addr,
    .out_fix_wr_data(of_wr_data), .out_sp2_wr_data(os_wr_data),
    .busy(c_busy), .finish(c_finish),
    .gemm_steps, .alu_steps, .fwd_count, .wait_cycles(compute_wait_cycles)
  );

  // ---------------- store ----------------
  logic s_busy;

  store_module #(.BAT(BAT), .BLK_IN(BLK_IN), .BLK_OUT_FIX(BLK_OUT_FIX),
                 .BLK_OUT_SP2(BLK_OUT_SP2), .ACT_W(ACT_W), .ACC_DEPTH(ACC_DEPTH),
                 .IDX_DEPTH(IDX_DEPTH), .AW(AW), .DW(DW)) u_store (
    .clk, .rst_n,
    .q_valid(st_q_valid), .q_ready(st_q_ready), .q_insn(st_insn),
    .tok_from_cp(c2s_avail), .tok_from_cp_pop(c2s_pop), .tok_to_cp_push(s2c_push),
    .out_rd_en, .out_rd_addr, .out_fix_rd_data(of_rd_data), .out_sp2_rd_data(os_rd_data),
    .idx_rd_en, .idx_rd_addr, .idx_fix_rd_data(if_rd_data), .idx_sp2_rd_data(is_rd_data),
    .wr_valid(dram_wr_valid), .wr_ready(dram_wr_ready), .wr_addr(dram_wr_addr),
    .wr_data(dram_wr_data), .wr_strb(dram_wr_strb),
    .busy(s_busy), .wait_cycles(store_wait_cycles)
  );

  // ---------------- status ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        done <= 1'b0;
    else if (start)    done <= 1'b0;
    else if (c_finish) done <= 1'b1;
  end

  assign busy = f_busy || l_busy || c_busy || s_busy || ld_q_valid || cp_q_valid || st_q_valid;
endmodule
