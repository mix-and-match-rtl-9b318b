// sram_1r1w: simple dual-port on-chip buffer (one write port, one read port).
//
// Used for every on-chip buffer of the accelerator: the input buffer, the
// fixed and SP2 weight buffers, the fixed and SP2 output buffers, the fixed
// and SP2 filter-index buffers and the micro-op cache. Each row is WIDTH
// bits wide. Reads are synchronous: rd_data shows row rd_addr one cycle after
// rd_en. A read and a write of the same row in the same cycle return the old
// contents. The memory is not reset (block RAM); rows must be written before
// they are read. The paper names the buffers; their widths follow from the
// tile sizes, their depths are this design's choice.
module sram_1r1w #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
