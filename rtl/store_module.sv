// store_module: writes finished output activations from the fixed or SP2
// output buffer back to DRAM, at the global filter position given by the
// matching filter-index buffer.
//
// Because the MSQ quantiser assigns whole filters (weight-matrix rows) to the
// fixed-point or the SP2 scheme by their variance, the Blk_out filters of a
// tile held by one core are not consecutive output channels. Each index
// buffer row lists, for the Blk_out local filters of a tile, their global
// output-channel numbers g. A STORE instruction (see msq_pkg) sends n_rows
// output-buffer rows of one core; row i holds pixel pix0 + i, a Bat x Blk_out
// block of n-bit activations, and element (b, c) goes to nibble address
//   dram_base + ((g / Blk_in) * n_pix + pix0 + i) * Bat * Blk_in
//             + b * Blk_in + g % Blk_in,            g = index[idx_row][c]
// i.e. back into the channel-blocked layout the load module reads, so the
// next layer can consume it directly. Each element is one DRAM write with a
// single nibble strobe set (Bat*Blk_out writes per row). A row costs two
// cycles of buffer read plus one cycle per element while wr_ready is high.
// pop_prev waits for a compute -> store token before starting, push_prev
// returns one to the compute module (output buffer free) when done.
// The index buffers and their purpose are the paper's; the DRAM layout, the
// per-element write and the token handshake are this design's choices.
module store_module
  import msq_pkg::*;
#(
  parameter int unsigned BAT         = BAT_D,
  parameter int unsigned BLK_IN      = BLK_IN_D,
  parameter int unsigned BLK_OUT_FIX = BLK_OUT_FIX_D,
  parameter int unsigned BLK_OUT_SP2 = BLK_OUT_SP2_D,
  parameter int unsigned ACT_W       = ACT_W_D,
  parameter int unsigned ACC_DEPTH   = ACC_DEPTH_D,
  parameter int unsigned IDX_DEPTH   = IDX_DEPTH_D,
  parameter int unsigned AW          = DRAM_AW_D,
  parameter int unsigned DW          = DRAM_W_D,
  localparam int unsigned NPW     = DW / ACT_W,           // activations per word
  localparam int unsigned OF_ROW  = BAT * BLK_OUT_FIX * ACT_W,
  localparam int unsigned OS_ROW  = BAT * BLK_OUT_SP2 * ACT_W,
  localparam int unsigned IF_ROW  = BLK_OUT_FIX * IDX_W,
  localparam int unsigned IS_ROW  = BLK_OUT_SP2 * IDX_W,
  localparam int unsigned RAW     = $clog2(ACC_DEPTH),
  localparam int unsigned XAW     = (IDX_DEPTH > 1) ? $clog2(IDX_DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction queue
  input  logic              q_valid,
  output logic              q_ready,
  input  insn_t             q_insn,
  // dependency tokens
  input  logic              tok_from_cp,
  output logic              tok_from_cp_pop,
  output logic              tok_to_cp_push,
  // output buffers
  output logic              out_rd_en,
  output logic [RAW-1:0]    out_rd_addr,
  input  logic [OF_ROW-1:0] out_fix_rd_data,
  input  logic [OS_ROW-1:0] out_sp2_rd_data,
  // index buffers
  output logic              idx_rd_en,
  output logic [XAW-1:0]    idx_rd_addr,
  input  logic [IF_ROW-1:0] idx_fix_rd_data,
  input  logic [IS_ROW-1:0] idx_sp2_rd_data,
  // DRAM write port
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [AW-1:0]     wr_addr,
  output logic [DW-1:0]     wr_data,
  output logic [NPW-1:0]    wr_strb,
  output logic              busy,
  output logic [31:0]       wait_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_TOKEN, S_RD, S_LATCH, S_ELEM, S_DONE} state_e;
  state_e       state;
  store_insn_t  si;
  dep_t         dep;
  logic [15:0]  row;
  logic [15:0]  elem;
  logic         sp2;
  logic [BAT*BLK_OUT_SP2-1:0][ACT_W-1:0] act_q;
  logic [BLK_OUT_SP2-1:0][IDX_W-1:0]     idx_q;
  logic [15:0]  n_elem, bo;

  always_comb begin
    sp2    = (si.core != 4'd0);
    bo     = sp2 ? 16'(BLK_OUT_SP2) : 16'(BLK_OUT_FIX);
    n_elem = 16'(BAT) * bo;
  end

  // address of the current element
  logic [15:0] eb, ec, g;
  logic [31:0] nib;
  always_comb begin
    eb  = elem / bo;
    ec  = elem % bo;
    g   = idx_q[ec];
    nib = si.dram_base
        + ((32'(g) / BLK_IN) * 32'(si.n_pix) + 32'(si.pix0) + 32'(row)) * (BAT * BLK_IN)
        + 32'(eb) * BLK_IN + (32'(g) % BLK_IN);
    wr_addr  = AW'(nib / NPW);
    wr_strb  = NPW'(1) << (nib % NPW);
    wr_data  = DW'(act_q[elem]) << ((nib % NPW) * ACT_W);
    wr_valid = (state == S_ELEM);
  end

  assign out_rd_en       = (state == S_RD);
  assign out_rd_addr     = RAW'(si.sram_base + row);
  assign idx_rd_en       = (state == S_RD);
  assign idx_rd_addr     = XAW'(si.idx_row);
  assign q_ready         = (state == S_DONE);
  assign busy            = (state != S_IDLE);
  assign tok_from_cp_pop = (state == S_TOKEN) && dep.pop_prev && tok_from_cp;
  assign tok_to_cp_push  = (state == S_DONE) && dep.push_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      si          <= '0;
      dep         <= '0;
      row         <= '0;
      elem        <= '0;
      act_q       <= '0;
      idx_q       <= '0;
      wait_cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (q_valid) begin
          si    <= store_insn_t'(q_insn.payload);
          dep   <= q_insn.dep;
          row   <= '0;
          state <= S_TOKEN;
        end
        S_TOKEN: begin
          if (!dep.pop_prev || tok_from_cp) state <= (si.n_rows == 0) ? S_DONE : S_RD;
          else wait_cycles <= wait_cycles + 1'b1;
        end
        S_RD:    state <= S_LATCH;
        S_LATCH: begin
          act_q <= sp2 ? out_sp2_rd_data : (BAT*BLK_OUT_SP2*ACT_W)'(out_fix_rd_data);
          idx_q <= sp2 ? idx_sp2_rd_data : (BLK_OUT_SP2*IDX_W)'(idx_fix_rd_data);
          elem  <= '0;
          state <= S_ELEM;
        end
        S_ELEM: if (wr_ready) begin
          if (elem + 1'b1 == n_elem) begin
            if (row + 1'b1 == si.n_rows) state <= S_DONE;
            else begin
              row   <= row + 1'b1;
              state <= S_RD;
            end
          end else begin
            elem <= elem + 1'b1;
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
