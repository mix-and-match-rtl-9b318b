// sync_fifo: small synchronous FIFO with valid/ready handshakes, used as the
// instruction queue in front of the Load, Compute and Store modules.
//
// in_ready is high when there is room; a word is accepted when in_valid and
// in_ready are both high. out_valid is high when the FIFO holds a word, which
// is shown on out_data (first-word fall-through) and removed when out_ready is
// high. DEPTH must be a power of two. Queue depth is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = msq_pkg::INSN_W,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign in_ready  = (wp - rp) != (AW+1)'(DEPTH);
  assign out_valid = (wp != rp);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
