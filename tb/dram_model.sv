// dram_model: behavioural model of the off-chip DRAM seen by the
// accelerator (not synthesizable logic of the design; testbench only).
//
// Read port: accepts one burst request (word address, length in beats) at a
// time, then after LAT cycles returns the beats in order, one per cycle,
// with resp_last on the final one; with GAPS set, idle cycles are inserted
// at random between beats. Write port: one 64-bit word per accepted write,
// merged under a per-nibble strobe; with GAPS set wr_ready drops at random.
// The memory array `mem` is filled and inspected by the testbenches through
// hierarchical references.
module dram_model #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned LAT   = 4,
  parameter bit          GAPS  = 1'b1,
  parameter int unsigned AW    = 32,
  parameter int unsigned DW    = 64,
  parameter int unsigned LW    = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [AW-1:0]    req_addr,
  input  logic [LW-1:0]    req_len,
  output logic             resp_valid,
  output logic [DW-1:0]    resp_data,
  output logic             resp_last,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [AW-1:0]    wr_addr,
  input  logic [DW-1:0]    wr_data,
  input  logic [DW/4-1:0]  wr_strb
);
  logic [DW-1:0] mem [DEPTH];
  logic          active;
  logic [AW-1:0] addr_q;
  logic [LW-1:0] left_q;
  int unsigned   delay;
  int unsigned   reads = 0, writes = 0;

  assign req_ready = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= 1'b0;
      resp_valid <= 1'b0;
      resp_last  <= 1'b0;
      resp_data  <= '0;
      addr_q     <= '0;
      left_q     <= '0;
      delay      <= 0;
      wr_ready   <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      resp_last  <= 1'b0;
      wr_ready   <= GAPS ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (req_valid && req_ready) begin
        active <= 1'b1;
        addr_q <= req_addr;
        left_q <= req_len;
        delay  <= LAT;
        reads  <= reads + 1;
      end else if (active) begin
        if (delay != 0) delay <= delay - 1;
        else if (!GAPS || $urandom_range(0, 4) != 0) begin
          resp_valid <= 1'b1;
          resp_data  <= mem[addr_q % DEPTH];
          resp_last  <= (left_q == 1);
          addr_q     <= addr_q + 1;
          left_q     <= left_q - 1;
          if (left_q == 1) active <= 1'b0;
        end
      end
      if (wr_valid && wr_ready) begin
        for (int n = 0; n < DW / 4; n++)
          if (wr_strb[n]) mem[wr_addr % DEPTH][n*4 +: 4] <= wr_data[n*4 +: 4];
        writes <= writes + 1;
      end
    end
  end
endmodule
