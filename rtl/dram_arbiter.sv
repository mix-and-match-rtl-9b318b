// dram_arbiter: shares the single DRAM read port between the instruction
// fetch, load and compute (micro-op) readers.
//
// Each requester presents a burst request (address in DRAM words, length in
// beats) with a valid/ready handshake. The arbiter grants one requester at a
// time, in round-robin order starting after the last one served, forwards
// its request and routes every response beat back to it until the beat
// marked last. Responses cannot be back-pressured. The paper only draws the
// DRAM connections; the arbitration scheme is this design's choice.
module dram_arbiter #(
  parameter int unsigned N      = 3,
  parameter int unsigned AW     = msq_pkg::DRAM_AW_D,
  parameter int unsigned DW     = msq_pkg::DRAM_W_D,
  parameter int unsigned LW     = 8,
  localparam int unsigned IW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // requesters
  input  logic [N-1:0]           m_req_valid,
  output logic [N-1:0]           m_req_ready,
  input  logic [N-1:0][AW-1:0]   m_req_addr,
  input  logic [N-1:0][LW-1:0]   m_req_len,
  output logic [N-1:0]           m_resp_valid,
  output logic [DW-1:0]          m_resp_data,
  output logic                   m_resp_last,
  // DRAM
  output logic                   s_req_valid,
  input  logic                   s_req_ready,
  output logic [AW-1:0]          s_req_addr,
  output logic [LW-1:0]          s_req_len,
  input  logic                   s_resp_valid,
  input  logic [DW-1:0]          s_resp_data,
  input  logic                   s_resp_last
);
  typedef enum logic [1:0] {A_IDLE, A_REQ, A_RESP} state_e;
  state_e          state;
  logic [IW-1:0]   grant, last;
  logic [IW-1:0]   pick;
  logic            any;

  // round-robin choice among the valid requesters
  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last) + k) % N;
      if (!any && m_req_valid[idx]) begin
        pick = IW'(idx);
        any  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      grant <= '0;
      last  <= IW'(N - 1);
    end else begin
      unique case (state)
        A_IDLE: if (any) begin
          grant <= pick;
          state <= A_REQ;
        end
        A_REQ:  if (s_req_ready) state <= A_RESP;
        A_RESP: if (s_resp_valid && s_resp_last) begin
          last  <= grant;
          state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  always_comb begin
    s_req_valid  = (state == A_REQ);
    s_req_addr   = m_req_addr[grant];
    s_req_len    = m_req_len[grant];
    m_req_ready  = '0;
    m_resp_valid = '0;
    if (state == A_REQ)  m_req_ready[grant]  = s_req_ready;
    if (state == A_RESP) m_resp_valid[grant] = s_resp_valid;
    m_resp_data  = s_resp_data;
    m_resp_last  = s_resp_last;
  end

  // a requester keeps its request steady until it is accepted
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (state == A_REQ && !s_req_ready) |=> (state == A_REQ && m_req_valid[grant]));
endmodule
