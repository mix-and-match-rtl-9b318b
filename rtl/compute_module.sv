// compute_module: executes GEMM and ALU instructions on the two
// heterogeneous GEMM cores, and loads the micro-op cache.
//
// It holds the micro-op cache, one partial-sum register file per core, the
// fixed-point GEMM core (multipliers), the SP2 GEMM core (shift-add) and the
// tensor ALU. Both cores run in lockstep on every GEMM step: the same
// activation tile, read from the input buffer, is broadcast to both, while
// each core reads its own weight buffer (fixed-point or SP2 weights) and
// accumulates into its own register file.
//
// Instructions (see msq_pkg):
//   LOAD/MEM_UOP  copy x_size micro-ops, one per DRAM word (low 32 bits),
//                 from dram_base into the micro-op cache at sram_base.
//   GEMM          loop nest i0 < iter_out, i1 < iter_in, u in [bgn, end):
//                 R[acc] += Wfix[wgt] x I[inp] (fixed core) and
//                 R[acc] += Wsp2[wgt] x I[inp] (SP2 core), or R[acc] = 0
//                 with reset; indices are the micro-op's plus i0/i1 times
//                 the instruction's factors.
//   ALU           same loop nest, R[dst] = op(R[dst], imm or R[src]) in the
//                 cores chosen by core_mask; the result clipped to n bits is
//                 written to that core's output buffer row dst.
//   FINISH        pulses finish.
// Timing: a three-stage pipeline (micro-op read, buffer and register-file
// read, compute and write back) retires one loop step per cycle. A step that
// reads a row written by the step just before it gets the new value through
// a bypass (counted on fwd_count); older writes are already in the register
// file. Tokens: pop_prev / push_prev talk to the load module, pop_next /
// push_next to the store module.
// The two cores, the broadcast input, the separate weight buffers, register
// files and output buffers are the paper's (Fig. 3); the loop-nest
// micro-op scheme follows the VTA design the paper builds on; the pipeline,
// bypass and ALU operation set are this design's.
module compute_module
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
  parameter int unsigned AW          = DRAM_AW_D,
  parameter int unsigned DW          = DRAM_W_D,
  parameter int unsigned LW          = 8,
  localparam int unsigned INP_ROW = BAT * BLK_IN * ACT_W,
  localparam int unsigned WF_ROW  = BLK_OUT_FIX * BLK_IN * WGT_W,
  localparam int unsigned WS_ROW  = BLK_OUT_SP2 * BLK_IN * WGT_W,
  localparam int unsigned AF_ROW  = BAT * BLK_OUT_FIX * ACC_W,
  localparam int unsigned AS_ROW  = BAT * BLK_OUT_SP2 * ACC_W,
  localparam int unsigned OF_ROW  = BAT * BLK_OUT_FIX * ACT_W,
  localparam int unsigned OS_ROW  = BAT * BLK_OUT_SP2 * ACT_W,
  localparam int unsigned IAW     = $clog2(INP_DEPTH),
  localparam int unsigned WAW     = $clog2(WGT_DEPTH),
  localparam int unsigned RAW     = $clog2(ACC_DEPTH),
  localparam int unsigned UAW     = $clog2(UOP_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction queue
  input  logic               q_valid,
  output logic               q_ready,
  input  insn_t              q_insn,
  // dependency tokens
  input  logic               tok_from_ld,
  output logic               tok_from_ld_pop,
  input  logic               tok_from_st,
  output logic               tok_from_st_pop,
  output logic               tok_to_ld_push,
  output logic               tok_to_st_push,
  // DRAM read port (micro-op loads)
  output logic               req_valid,
  input  logic               req_ready,
  output logic [AW-1:0]      req_addr,
  output logic [LW-1:0]      req_len,
  input  logic               resp_valid,
  input  logic [DW-1:0]      resp_data,
  input  logic               resp_last,
  // input buffer (broadcast to both cores)
  output logic               inp_rd_en,
  output logic [IAW-1:0]     inp_rd_addr,
  input  logic [INP_ROW-1:0] inp_rd_data,
  // weight buffers
  output logic               wgt_rd_en,
  output logic [WAW-1:0]     wgt_rd_addr,
  input  logic [WF_ROW-1:0]  wgt_fix_rd_data,
  input  logic [WS_ROW-1:0]  wgt_sp2_rd_data,
  // output buffers
  output logic               out_fix_wr_en,
  output logic               out_sp2_wr_en,
  output logic [RAW-1:0]     out_wr_addr,
  output logic [OF_ROW-1:0]  out_fix_wr_data,
  output logic [OS_ROW-1:0]  out_sp2_wr_data,
  // status
  output logic               busy,
  output logic               finish,
  output logic [31:0]        gemm_steps,
  output logic [31:0]        alu_steps,
  output logic [31:0]        fwd_count,
  output logic [31:0]        wait_cycles
);
  localparam int unsigned LANES = BAT * (BLK_OUT_FIX + BLK_OUT_SP2);

  typedef enum logic [2:0] {C_IDLE, C_TOKEN, C_UOP_READ, C_UOP_WAIT, C_UOP_NEXT,
                            C_EXEC, C_DRAIN, C_DONE} state_e;
  state_e     state;
  opcode_e    op_q;
  dep_t       dep;
  mem_insn_t  mi;
  gemm_insn_t gi;
  alu_insn_t  ai;

  // ------------------------------------------------------------------
  // micro-op cache
  // ------------------------------------------------------------------
  logic            uop_wr_en;
  logic [UAW-1:0]  uop_wr_addr;
  logic [UOP_W-1:0] uop_wr_data;
  logic            uop_rd_en;
  logic [UAW-1:0]  uop_rd_addr;
  logic [UOP_W-1:0] uop_rd_data;

  sram_1r1w #(.WIDTH(UOP_W), .DEPTH(UOP_DEPTH)) u_uop_cache (
    .clk, .wr_en(uop_wr_en), .wr_addr(uop_wr_addr), .wr_data(uop_wr_data),
    .rd_en(uop_rd_en), .rd_addr(uop_rd_addr), .rd_data(uop_rd_data)
  );

  logic           rd_start, rd_busy, rd_done;
  logic [DW-1:0]  rd_row;
  logic [15:0]    ux;

  dram_row_reader #(.ROW_W(DW), .AW(AW), .DW(DW), .LW(LW)) u_rd (
    .clk, .rst_n,
    .start (rd_start), .addr(mi.dram_base[AW-1:0] + AW'(ux)), .beats(LW'(1)),
    .busy  (rd_busy), .done(rd_done), .row_data(rd_row),
    .req_valid, .req_ready, .req_addr, .req_len,
    .resp_valid, .resp_data, .resp_last
  );

  // ------------------------------------------------------------------
  // register files
  // ------------------------------------------------------------------
  logic           rf_rd_en;
  logic [RAW-1:0] rf_rd_a, rf_rd_b;
  logic [AF_ROW-1:0] rff_a, rff_b, rff_wdata;
  logic [AS_ROW-1:0] rfs_a, rfs_b, rfs_wdata;
  logic           rff_we, rfs_we;
  logic [RAW-1:0] rf_waddr;

  reg_file #(.WIDTH(AF_ROW), .DEPTH(ACC_DEPTH)) u_rf_fix (
    .clk, .wr_en(rff_we), .wr_addr(rf_waddr), .wr_data(rff_wdata),
    .rd_en(rf_rd_en), .rd_addr_a(rf_rd_a), .rd_addr_b(rf_rd_b),
    .rd_data_a(rff_a), .rd_data_b(rff_b)
  );
  reg_file #(.WIDTH(AS_ROW), .DEPTH(ACC_DEPTH)) u_rf_sp2 (
    .clk, .wr_en(rfs_we), .wr_addr(rf_waddr), .wr_data(rfs_wdata),
    .rd_en(rf_rd_en), .rd_addr_a(rf_rd_a), .rd_addr_b(rf_rd_b),
    .rd_data_a(rfs_a), .rd_data_b(rfs_b)
  );

  // ------------------------------------------------------------------
  // pipeline
  // ------------------------------------------------------------------
  logic        is_gemm;
  logic [11:0] uop_bgn, uop_end, iter_out, iter_in;
  logic [11:0] i0, i1, u;
  logic        s0_active;                 // stage 0 still issuing
  logic        s1_valid, s2_valid;
  logic [11:0] s1_i0, s1_i1;
  logic [RAW-1:0] s2_dst, s2_src;

  // last write, for the bypass
  logic           lw_fix, lw_sp2;
  logic [RAW-1:0] lw_addr;
  logic [AF_ROW-1:0] lw_fdata;
  logic [AS_ROW-1:0] lw_sdata;

  always_comb begin
    is_gemm  = (op_q == OP_GEMM);
    uop_bgn  = is_gemm ? gi.uop_bgn  : ai.uop_bgn;
    uop_end  = is_gemm ? gi.uop_end  : ai.uop_end;
    iter_out = is_gemm ? gi.iter_out : ai.iter_out;
    iter_in  = is_gemm ? gi.iter_in  : ai.iter_in;
  end

  // stage 1: index arithmetic on the micro-op just read
  uop_t s1_uop;
  logic [31:0] s1_acc, s1_inp, s1_wgt;
  always_comb begin
    s1_uop = uop_t'(uop_rd_data);
    if (is_gemm) begin
      s1_acc = 32'(s1_uop.acc_idx) + 32'(s1_i0) * 32'(gi.acc_f0) + 32'(s1_i1) * 32'(gi.acc_f1);
      s1_inp = 32'(s1_uop.inp_idx) + 32'(s1_i0) * 32'(gi.inp_f0) + 32'(s1_i1) * 32'(gi.inp_f1);
      s1_wgt = 32'(s1_uop.wgt_idx) + 32'(s1_i0) * 32'(gi.wgt_f0) + 32'(s1_i1) * 32'(gi.wgt_f1);
    end else begin
      s1_acc = 32'(s1_uop.acc_idx) + 32'(s1_i0) * 32'(ai.dst_f0) + 32'(s1_i1) * 32'(ai.dst_f1);
      s1_inp = 32'(s1_uop.inp_idx) + 32'(s1_i0) * 32'(ai.src_f0) + 32'(s1_i1) * 32'(ai.src_f1);
      s1_wgt = 32'(s1_uop.wgt_idx);
    end
    uop_rd_en   = (state == C_EXEC) && s0_active;
    uop_rd_addr = UAW'(u);
    rf_rd_en    = s1_valid;
    rf_rd_a     = RAW'(s1_acc);
    rf_rd_b     = RAW'(s1_inp);
    inp_rd_en   = s1_valid && is_gemm;
    inp_rd_addr = IAW'(s1_inp);
    wgt_rd_en   = s1_valid && is_gemm;
    wgt_rd_addr = WAW'(s1_wgt);
  end

  // stage 2: bypass, GEMM cores, tensor ALU, write back
  logic [AF_ROW-1:0] f_a, f_b, f_gemm;
  logic [AS_ROW-1:0] s_a, s_b, s_gemm;
  logic              byp_a, byp_b;
  logic [LANES-1:0][ACC_W-1:0] alu_res;
  logic [LANES-1:0][ACT_W-1:0] alu_act;

  always_comb begin
    byp_a = (lw_fix || lw_sp2) && (lw_addr == s2_dst);
    byp_b = (lw_fix || lw_sp2) && (lw_addr == s2_src);
    f_a   = (lw_fix && lw_addr == s2_dst) ? lw_fdata : rff_a;
    s_a   = (lw_sp2 && lw_addr == s2_dst) ? lw_sdata : rfs_a;
    f_b   = (lw_fix && lw_addr == s2_src) ? lw_fdata : rff_b;
    s_b   = (lw_sp2 && lw_addr == s2_src) ? lw_sdata : rfs_b;
  end

  gemm_fixed #(.BAT(BAT), .BLK_IN(BLK_IN), .BLK_OUT(BLK_OUT_FIX), .ACT_W(ACT_W),
               .WGT_W(WGT_W), .ACC_W(ACC_W)) u_gemm_fixed (
    .act(inp_rd_data), .wgt(wgt_fix_rd_data), .acc_in(f_a), .acc_out(f_gemm)
  );
  gemm_sp2 #(.BAT(BAT), .BLK_IN(BLK_IN), .BLK_OUT(BLK_OUT_SP2), .ACT_W(ACT_W),
             .M1(M1), .M2(M2), .ACC_W(ACC_W)) u_gemm_sp2 (
    .act(inp_rd_data), .wgt(wgt_sp2_rd_data), .acc_in(s_a), .acc_out(s_gemm)
  );
  tensor_alu #(.LANES(LANES), .ACC_W(ACC_W), .ACT_W(ACT_W)) u_alu (
    .op(ai.op), .use_imm(ai.use_imm), .imm(ai.imm),
    .a({s_a, f_a}), .b({s_b, f_b}), .res(alu_res), .act(alu_act)
  );

  always_comb begin
    rf_waddr        = s2_dst;
    out_wr_addr     = s2_dst;
    out_fix_wr_data = alu_act[BAT*BLK_OUT_FIX-1:0];
    out_sp2_wr_data = alu_act[LANES-1:BAT*BLK_OUT_FIX];
    if (is_gemm) begin
      rff_we        = s2_valid;
      rfs_we        = s2_valid;
      rff_wdata     = gi.reset ? '0 : f_gemm;
      rfs_wdata     = gi.reset ? '0 : s_gemm;
      out_fix_wr_en = 1'b0;
      out_sp2_wr_en = 1'b0;
    end else begin
      rff_we        = s2_valid && ai.core_mask[0];
      rfs_we        = s2_valid && ai.core_mask[1];
      rff_wdata     = alu_res[BAT*BLK_OUT_FIX-1:0];
      rfs_wdata     = alu_res[LANES-1:BAT*BLK_OUT_FIX];
      out_fix_wr_en = rff_we;
      out_sp2_wr_en = rfs_we;
    end
  end

  // ------------------------------------------------------------------
  // control
  // ------------------------------------------------------------------
  logic tok_ok;
  always_comb begin
    tok_ok          = (!dep.pop_prev || tok_from_ld) && (!dep.pop_next || tok_from_st);
    tok_from_ld_pop = (state == C_TOKEN) && tok_ok && dep.pop_prev;
    tok_from_st_pop = (state == C_TOKEN) && tok_ok && dep.pop_next;
    tok_to_ld_push  = (state == C_DONE) && dep.push_prev;
    tok_to_st_push  = (state == C_DONE) && dep.push_next;
    q_ready         = (state == C_DONE);
    rd_start        = (state == C_UOP_READ);
    busy            = (state != C_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= C_IDLE;
      op_q        <= OP_FINISH;
      dep         <= '0;
      mi          <= '0;
      gi          <= '0;
      ai          <= '0;
      ux          <= '0;
      i0          <= '0;
      i1          <= '0;
      u           <= '0;
      s0_active   <= 1'b0;
      s1_valid    <= 1'b0;
      s2_valid    <= 1'b0;
      s1_i0       <= '0;
      s1_i1       <= '0;
      s2_dst      <= '0;
      s2_src      <= '0;
      lw_fix      <= 1'b0;
      lw_sp2      <= 1'b0;
      lw_addr     <= '0;
      lw_fdata    <= '0;
      lw_sdata    <= '0;
      uop_wr_en   <= 1'b0;
      uop_wr_addr <= '0;
      uop_wr_data <= '0;
      finish      <= 1'b0;
      gemm_steps  <= '0;
      alu_steps   <= '0;
      fwd_count   <= '0;
      wait_cycles <= '0;
    end else begin
      uop_wr_en <= 1'b0;
      finish    <= 1'b0;

      // pipeline registers
      s1_valid <= uop_rd_en;
      s1_i0    <= i0;
      s1_i1    <= i1;
      s2_valid <= s1_valid;
      s2_dst   <= RAW'(s1_acc);
      s2_src   <= RAW'(s1_inp);
      lw_fix   <= rff_we;
      lw_sp2   <= rfs_we;
      lw_addr  <= rf_waddr;
      lw_fdata <= rff_wdata;
      lw_sdata <= rfs_wdata;
      if (s2_valid) begin
        if (is_gemm) gemm_steps <= gemm_steps + 1'b1;
        else         alu_steps  <= alu_steps + 1'b1;
        if (byp_a || (!is_gemm && !ai.use_imm && byp_b)) fwd_count <= fwd_count + 1'b1;
      end

      unique case (state)
        C_IDLE: if (q_valid) begin
          op_q  <= q_insn.opcode;
          dep   <= q_insn.dep;
          mi    <= mem_insn_t'(q_insn.payload);
          gi    <= gemm_insn_t'(q_insn.payload);
          ai    <= alu_insn_t'(q_insn.payload);
          state <= C_TOKEN;
        end
        C_TOKEN: begin
          if (tok_ok) begin
            i0 <= '0;
            i1 <= '0;
            ux <= '0;
            unique case (op_q)
              OP_LOAD:   state <= (mi.x_size == 0) ? C_DONE : C_UOP_READ;
              OP_GEMM, OP_ALU: begin
                u         <= uop_bgn;
                s0_active <= (uop_end > uop_bgn) && (iter_out != 0) && (iter_in != 0);
                state     <= C_EXEC;
              end
              OP_FINISH: begin
                finish <= 1'b1;
                state  <= C_DONE;
              end
              default:   state <= C_DONE;
            endcase
          end else begin
            wait_cycles <= wait_cycles + 1'b1;
          end
        end
        C_UOP_READ: state <= C_UOP_WAIT;
        C_UOP_WAIT: if (rd_done) begin
          uop_wr_en   <= 1'b1;
          uop_wr_addr <= UAW'(mi.sram_base + ux);
          uop_wr_data <= rd_row[UOP_W-1:0];
          state       <= C_UOP_NEXT;
        end
        C_UOP_NEXT: begin
          if (ux + 1'b1 == mi.x_size) state <= C_DONE;
          else begin
            ux    <= ux + 1'b1;
            state <= C_UOP_READ;
          end
        end
        C_EXEC: begin
          if (s0_active) begin
            if (u + 1'b1 == uop_end) begin
              u <= uop_bgn;
              if (i1 + 1'b1 == iter_in) begin
                i1 <= '0;
                if (i0 + 1'b1 == iter_out) s0_active <= 1'b0;
                else i0 <= i0 + 1'b1;
              end else begin
                i1 <= i1 + 1'b1;
              end
            end else begin
              u <= u + 1'b1;
            end
          end else if (!s1_valid && !s2_valid) begin
            state <= C_DONE;
          end
        end
        C_DONE: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
