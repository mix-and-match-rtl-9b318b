// fixed_pe: one multiplier of the fixed-point GEMM core (mapped to a DSP).
//
// Multiplies an n-bit unsigned activation by an m-bit sign-magnitude
// fixed-point weight {sign, magnitude[m-2:0]} and returns the signed product
// in integer units (the layer scaling factor alpha / (2^(m-1)-1) is applied
// later by the tensor ALU). Purely combinational.
// From the paper: activation is an n-bit unsigned integer, the weight an
// (m-1)-bit unsigned integer plus a sign (Table 1). The two's-complement
// product output is this design's choice.
module fixed_pe #(
  parameter int unsigned ACT_W = msq_pkg::ACT_W_D,
  parameter int unsigned WGT_W = msq_pkg::WGT_W_D,
  localparam int unsigned PROD_W = ACT_W + WGT_W   // signed product width
) (
  input  logic [ACT_W-1:0]         act,
  input  logic [WGT_W-1:0]         wgt,
  output logic signed [PROD_W-1:0] prod
);
  logic [ACT_W+WGT_W-2:0] mag;
  always_comb begin
    mag  = act * wgt[WGT_W-2:0];
    prod = wgt[WGT_W-1] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end
endmodule
