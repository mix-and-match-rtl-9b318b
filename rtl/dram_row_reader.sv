// dram_row_reader: reads one row of a buffer from DRAM as a burst.
//
// On start it requests `beats` consecutive DRAM words from word address
// `addr`, collects the response beats into a ROW_W-bit row (beat k lands in
// bits [k*DW +: DW], bits past the last beat read as zero) and pulses done
// for one cycle with the row on row_data. busy is high from start to done.
// Used by the instruction fetch, load and compute modules; this design's own
// helper.
module dram_row_reader #(
  parameter int unsigned ROW_W = 128,
  parameter int unsigned AW    = msq_pkg::DRAM_AW_D,
  parameter int unsigned DW    = msq_pkg::DRAM_W_D,
  parameter int unsigned LW    = 8,
  localparam int unsigned MAXB = (ROW_W + DW - 1) / DW,
  localparam int unsigned BW   = (MAXB > 1) ? $clog2(MAXB) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    addr,
  input  logic [LW-1:0]    beats,
  output logic             busy,
  output logic             done,
  output logic [ROW_W-1:0] row_data,
  // DRAM read port
  output logic             req_valid,
  input  logic             req_ready,
  output logic [AW-1:0]    req_addr,
  output logic [LW-1:0]    req_len,
  input  logic             resp_valid,
  input  logic [DW-1:0]    resp_data,
  input  logic             resp_last
);
  logic [MAXB*DW-1:0] buf_q;
  logic [BW-1:0]      cnt;
  logic               waiting;

  assign busy     = req_valid || waiting;
  assign row_data = buf_q[ROW_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid <= 1'b0;
      waiting   <= 1'b0;
      done      <= 1'b0;
      cnt       <= '0;
      req_addr  <= '0;
      req_len   <= '0;
      buf_q     <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        req_valid <= 1'b1;
        req_addr  <= addr;
        req_len   <= beats;
        cnt       <= '0;
        buf_q     <= '0;
      end
      if (req_valid && req_ready) begin
        req_valid <= 1'b0;
        waiting   <= 1'b1;
      end
      if (waiting && resp_valid) begin
        buf_q[cnt*DW +: DW] <= resp_data;
        cnt <= cnt + 1'b1;
        if (resp_last) begin
          waiting <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
