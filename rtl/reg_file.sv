// reg_file: partial-sum register file of one GEMM core (scratchpad).
//
// Holds DEPTH rows of Bat x Blk_out accumulators. It has two synchronous read
// ports and one write port so that the compute module can, in the same
// cycle, read the destination row and the second source row of a tensor ALU
// operation, or the row a GEMM accumulates into. Data appears one cycle after
// the read enable; a read and a write of the same row in one cycle return the
// old contents (the compute module forwards the newer value itself). One
// register file per GEMM core, as the paper states ("individual register
// files"); the port count, depth and read timing are this design's choice.
module reg_file #(
  parameter int unsigned WIDTH = msq_pkg::BAT_D * msq_pkg::BLK_OUT_FIX_D * msq_pkg::ACC_W_D,
  parameter int unsigned DEPTH = msq_pkg::ACC_DEPTH_D,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr_a,
  input  logic [AW-1:0]    rd_addr_b,
  output logic [WIDTH-1:0] rd_data_a,
  output logic [WIDTH-1:0] rd_data_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_data_a <= mem[rd_addr_a];
      rd_data_b <= mem[rd_addr_b];
    end
  end
endmodule
