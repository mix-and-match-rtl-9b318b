// gemm_fixed: fixed-point GEMM core (multipliers, meant for DSP slices).
//
// Multiplies a Bat x Blk_in tile of n-bit unsigned activations by a
// Blk_out x Blk_in tile of m-bit sign-magnitude fixed-point weights and adds
// the result to a Bat x Blk_out tile of partial sums:
//   acc_out[b][o] = acc_in[b][o] + sum_i act[b][i] * w[o][i]
// There are Bat*Blk_out dot-product units, each of Blk_in fixed_pe
// multipliers and an adder tree, so one tile is consumed per cycle. The tile
// shapes and the multiplier/accumulator structure are the paper's (Fig. 3(b),
// 3(c)); the core is combinational here and the caller registers around it,
// which is this design's choice.
module gemm_fixed #(
  parameter int unsigned BAT     = msq_pkg::BAT_D,
  parameter int unsigned BLK_IN  = msq_pkg::BLK_IN_D,
  parameter int unsigned BLK_OUT = msq_pkg::BLK_OUT_FIX_D,
  parameter int unsigned ACT_W   = msq_pkg::ACT_W_D,
  parameter int unsigned WGT_W   = msq_pkg::WGT_W_D,
  parameter int unsigned ACC_W   = msq_pkg::ACC_W_D
) (
  input  logic [BAT-1:0][BLK_IN-1:0][ACT_W-1:0]    act,
  input  logic [BLK_OUT-1:0][BLK_IN-1:0][WGT_W-1:0] wgt,
  input  logic [BAT-1:0][BLK_OUT-1:0][ACC_W-1:0]   acc_in,
  output logic [BAT-1:0][BLK_OUT-1:0][ACC_W-1:0]   acc_out
);
  localparam int unsigned PROD_W = ACT_W + WGT_W;

  for (genvar b = 0; b < BAT; b++) begin : g_bat
    for (genvar o = 0; o < BLK_OUT; o++) begin : g_out
      logic signed [BLK_IN-1:0][PROD_W-1:0] prod;
      for (genvar i = 0; i < BLK_IN; i++) begin : g_in
        fixed_pe #(.ACT_W(ACT_W), .WGT_W(WGT_W)) u_pe (
          .act (act[b][i]),
          .wgt (wgt[o][i]),
          .prod(prod[i])
        );
      end
      always_comb begin
        logic signed [ACC_W-1:0] s;
        s = $signed(acc_in[b][o]);
        for (int i = 0; i < BLK_IN; i++) s += ACC_W'($signed(prod[i]));
        acc_out[b][o] = s;
      end
    end
  end
endmodule
