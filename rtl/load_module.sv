// load_module: moves activations, weights and filter indices from DRAM into
// the on-chip buffers.
//
// It executes LOAD instructions taken from its queue. A LOAD copies a 2-D
// block of y_size x x_size rows: row (y, x) is read as a burst of row_beats
// DRAM words from dram_base + (y * x_stride + x) * row_beats and written to
// row sram_base + y * x_size + x of the buffer named by mem_type (input
// buffer, fixed or SP2 weight buffer, fixed or SP2 index buffer). The beat
// count of a row follows from the row width of that buffer. Before starting
// an instruction with pop_next it waits for a token from the compute module
// (buffer free to overwrite); after finishing one with push_next it sends a
// token to the compute module (data ready). A row is written one cycle after
// its last beat arrives. The paper states only that the load module moves
// activations and weights between DRAM and the on-chip buffers; the
// instruction format, the token handshake and loading the index buffers
// through this module are this design's choices.
module load_module
  import msq_pkg::*;
#(
  parameter int unsigned BAT         = BAT_D,
  parameter int unsigned BLK_IN      = BLK_IN_D,
  parameter int unsigned BLK_OUT_FIX = BLK_OUT_FIX_D,
  parameter int unsigned BLK_OUT_SP2 = BLK_OUT_SP2_D,
  parameter int unsigned ACT_W       = ACT_W_D,
  parameter int unsigned WGT_W       = WGT_W_D,
  parameter int unsigned AW          = DRAM_AW_D,
  parameter int unsigned DW          = DRAM_W_D,
  parameter int unsigned LW          = 8,
  localparam int unsigned INP_ROW = BAT * BLK_IN * ACT_W,
  localparam int unsigned WF_ROW  = BLK_OUT_FIX * BLK_IN * WGT_W,
  localparam int unsigned WS_ROW  = BLK_OUT_SP2 * BLK_IN * WGT_W,
  localparam int unsigned IF_ROW  = BLK_OUT_FIX * IDX_W,
  localparam int unsigned IS_ROW  = BLK_OUT_SP2 * IDX_W,
  localparam int unsigned MAX_ROW = (WS_ROW > WF_ROW ? (WS_ROW > INP_ROW ? WS_ROW : INP_ROW)
                                                     : (WF_ROW > INP_ROW ? WF_ROW : INP_ROW))
) (
  input  logic               clk,
  input  logic               rst_n,
  // instruction queue
  input  logic               q_valid,
  output logic               q_ready,
  input  insn_t              q_insn,
  // dependency tokens
  input  logic               tok_from_cp,     // compute -> load token available
  output logic               tok_from_cp_pop,
  output logic               tok_to_cp_push,  // load -> compute
  // DRAM read port
  output logic               req_valid,
  input  logic               req_ready,
  output logic [AW-1:0]      req_addr,
  output logic [LW-1:0]      req_len,
  input  logic               resp_valid,
  input  logic [DW-1:0]      resp_data,
  input  logic               resp_last,
  // buffer write ports (shared address/data, one enable per buffer)
  output logic               wr_inp,
  output logic               wr_wgt_fix,
  output logic               wr_wgt_sp2,
  output logic               wr_idx_fix,
  output logic               wr_idx_sp2,
  output logic [15:0]        wr_addr,
  output logic [MAX_ROW-1:0] wr_data,
  output logic               busy,
  output logic [31:0]        wait_cycles     // cycles spent waiting for a token
);
  typedef enum logic [2:0] {L_IDLE, L_TOKEN, L_READ, L_WAIT, L_NEXT, L_DONE} state_e;
  state_e       state;
  mem_insn_t    mi;
  dep_t         dep;
  logic [15:0]  y, x;
  logic [LW-1:0] beats;
  logic [AW-1:0] row_addr;
  logic         rd_start, rd_busy, rd_done;
  logic [MAX_ROW-1:0] rd_row;

  dram_row_reader #(.ROW_W(MAX_ROW), .AW(AW), .DW(DW), .LW(LW)) u_rd (
    .clk, .rst_n,
    .start (rd_start), .addr(row_addr), .beats(beats),
    .busy  (rd_busy), .done(rd_done), .row_data(rd_row),
    .req_valid, .req_ready, .req_addr, .req_len,
    .resp_valid, .resp_data, .resp_last
  );

  always_comb begin
    unique case (mi.mem_type)
      MEM_INP:     beats = LW'(beats_for(INP_ROW, DW));
      MEM_WGT_FIX: beats = LW'(beats_for(WF_ROW, DW));
      MEM_WGT_SP2: beats = LW'(beats_for(WS_ROW, DW));
      MEM_IDX_FIX: beats = LW'(beats_for(IF_ROW, DW));
      MEM_IDX_SP2: beats = LW'(beats_for(IS_ROW, DW));
      default:     beats = LW'(1);
    endcase
    row_addr = mi.dram_base[AW-1:0]
             + AW'((32'(y) * 32'(mi.x_stride) + 32'(x)) * 32'(beats));
  end

  assign rd_start        = (state == L_READ);
  assign busy            = (state != L_IDLE);
  assign q_ready         = (state == L_DONE);
  assign tok_from_cp_pop = (state == L_TOKEN) && dep.pop_next && tok_from_cp;
  assign tok_to_cp_push  = (state == L_DONE) && dep.push_next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= L_IDLE;
      mi          <= '0;
      dep         <= '0;
      y           <= '0;
      x           <= '0;
      wr_inp      <= 1'b0;
      wr_wgt_fix  <= 1'b0;
      wr_wgt_sp2  <= 1'b0;
      wr_idx_fix  <= 1'b0;
      wr_idx_sp2  <= 1'b0;
      wr_addr     <= '0;
      wr_data     <= '0;
      wait_cycles <= '0;
    end else begin
      {wr_inp, wr_wgt_fix, wr_wgt_sp2, wr_idx_fix, wr_idx_sp2} <= '0;
      unique case (state)
        L_IDLE: if (q_valid) begin
          mi    <= mem_insn_t'(q_insn.payload);
          dep   <= q_insn.dep;
          y     <= '0;
          x     <= '0;
          state <= L_TOKEN;
        end
        L_TOKEN: begin
          if (!dep.pop_next || tok_from_cp) begin
            state <= (mi.y_size == 0 || mi.x_size == 0) ? L_DONE : L_READ;
          end else begin
            wait_cycles <= wait_cycles + 1'b1;
          end
        end
        L_READ: state <= L_WAIT;
        L_WAIT: if (rd_done) begin
          wr_addr <= mi.sram_base + y * mi.x_size + x;
          wr_data <= rd_row;
          unique case (mi.mem_type)
            MEM_INP:     wr_inp     <= 1'b1;
            MEM_WGT_FIX: wr_wgt_fix <= 1'b1;
            MEM_WGT_SP2: wr_wgt_sp2 <= 1'b1;
            MEM_IDX_FIX: wr_idx_fix <= 1'b1;
            MEM_IDX_SP2: wr_idx_sp2 <= 1'b1;
            default: ;
          endcase
          state <= L_NEXT;
        end
        L_NEXT: begin
          if (x + 1'b1 == mi.x_size) begin
            x <= '0;
            if (y + 1'b1 == mi.y_size) state <= L_DONE;
            else begin
              y     <= y + 1'b1;
              state <= L_READ;
            end
          end else begin
            x     <= x + 1'b1;
            state <= L_READ;
          end
        end
        L_DONE: state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
