// fetch_module: instruction fetch and dispatch.
//
// After a start pulse it reads insn_count 128-bit instructions from DRAM,
// starting at word address insn_addr (two 64-bit words per instruction,
// low word first), and hands each one to the queue of the module that
// executes it:
//   LOAD of the input, weight or index buffers    -> load queue
//   LOAD of the micro-op cache, GEMM, ALU, FINISH -> compute queue
//   STORE                                         -> store queue
// A full queue stalls fetching (counted on stall_cycles for observation).
// busy stays high until every instruction has been dispatched. The paper
// says the instruction module loads the instructions and provides control
// signals to the other modules; the queue routing follows the VTA design it
// builds on, and the encoding is this design's.
module fetch_module
  import msq_pkg::*;
#(
  parameter int unsigned AW = DRAM_AW_D,
  parameter int unsigned DW = DRAM_W_D,
  parameter int unsigned LW = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AW-1:0]     insn_addr,
  input  logic [15:0]       insn_count,
  output logic              busy,
  output logic [31:0]       stall_cycles,
  // DRAM read port
  output logic              req_valid,
  input  logic              req_ready,
  output logic [AW-1:0]     req_addr,
  output logic [LW-1:0]     req_len,
  input  logic              resp_valid,
  input  logic [DW-1:0]     resp_data,
  input  logic              resp_last,
  // instruction queues
  output logic              ld_valid,
  input  logic              ld_ready,
  output logic              cp_valid,
  input  logic              cp_ready,
  output logic              st_valid,
  input  logic              st_ready,
  output insn_t             insn
);
  localparam int unsigned BEATS = INSN_W / DW;

  typedef enum logic [1:0] {F_IDLE, F_READ, F_WAIT, F_DISPATCH} state_e;
  state_e       state;
  logic [AW-1:0] pc;
  logic [15:0]  remaining;
  logic         rd_start, rd_busy, rd_done;
  logic [INSN_W-1:0] rd_row;
  logic         to_ld, to_st, to_cp, accepted;

  dram_row_reader #(.ROW_W(INSN_W), .AW(AW), .DW(DW), .LW(LW)) u_rd (
    .clk, .rst_n,
    .start (rd_start), .addr(pc), .beats(LW'(BEATS)),
    .busy  (rd_busy), .done(rd_done), .row_data(rd_row),
    .req_valid, .req_ready, .req_addr, .req_len,
    .resp_valid, .resp_data, .resp_last
  );

  always_comb begin
    mem_insn_t m;
    m     = mem_insn_t'(insn.payload);
    to_st = (insn.opcode == OP_STORE);
    to_ld = (insn.opcode == OP_LOAD) && (m.mem_type != MEM_UOP);
    to_cp = !to_st && !to_ld;
    ld_valid = (state == F_DISPATCH) && to_ld;
    st_valid = (state == F_DISPATCH) && to_st;
    cp_valid = (state == F_DISPATCH) && to_cp;
    accepted = (ld_valid && ld_ready) || (st_valid && st_ready) || (cp_valid && cp_ready);
    rd_start = (state == F_READ);
  end

  assign busy = (state != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= F_IDLE;
      pc           <= '0;
      remaining    <= '0;
      insn         <= '0;
      stall_cycles <= '0;
    end else begin
      unique case (state)
        F_IDLE: if (start && insn_count != 0) begin
          pc        <= insn_addr;
          remaining <= insn_count;
          state     <= F_READ;
        end
        F_READ: state <= F_WAIT;
        F_WAIT: if (rd_done) begin
          insn  <= insn_t'(rd_row);
          state <= F_DISPATCH;
        end
        F_DISPATCH: begin
          if (accepted) begin
            pc        <= pc + AW'(BEATS);
            remaining <= remaining - 1'b1;
            state     <= (remaining == 16'd1) ? F_IDLE : F_READ;
          end else begin
            stall_cycles <= stall_cycles + 1'b1;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end
endmodule
