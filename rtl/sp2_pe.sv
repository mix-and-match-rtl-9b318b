// sp2_pe: one shift-add processing element of the SP2 GEMM core (LUTs).
//
// An m-bit SP2 weight is {sign, c1[m1-1:0], c2[m2-1:0]} and stands for
// +-(q1 + q2) with q1 = 2^-(2^m1 - c1), q2 = 2^-(2^m2 - c2), and a zero code
// meaning a zero term. Measured in units of 2^-(2^m1 - 1) both terms are
// powers of two, so the product with an n-bit unsigned activation is
//   Shifter A: c1 ? act << (c1 - 1)                     : 0
//   Shifter B: c2 ? act << (c2 - 1 + 2^m1 - 2^m2)       : 0
//   result   : +-(A + B)
// which is two shifts and one addition, as in the paper's Fig. 3(c).
// Shifter A shifts by up to 2^m1 - 2 bits, as Table 1 states. Table 1 also
// gives 2^m2 - 2 bits for shifter B, which holds only if q2 is counted in its
// own units. This PE keeps the q1 and q2 values of Eq. (7) in common units,
// so shifter B adds the offset 2^m1 - 2^m2. Combinational.
module sp2_pe #(
  parameter int unsigned ACT_W = msq_pkg::ACT_W_D,
  parameter int unsigned M1    = msq_pkg::M1_D,
  parameter int unsigned M2    = msq_pkg::M2_D,
  localparam int unsigned WGT_W  = M1 + M2 + 1,
  localparam int unsigned SHMAX  = (1 << M1) - 2,       // largest shift
  localparam int unsigned PROD_W = ACT_W + SHMAX + 2    // signed, A+B carry
) (
  input  logic [ACT_W-1:0]         act,
  input  logic [WGT_W-1:0]         wgt,
  output logic signed [PROD_W-1:0] prod
);
  localparam int unsigned OFFS_B = (1 << M1) - (1 << M2);

  logic [M1-1:0]        c1;
  logic [M2-1:0]        c2;
  logic [PROD_W-2:0]    sh_a, sh_b, sum;

  always_comb begin
    c1   = wgt[M1+M2-1:M2];
    c2   = wgt[M2-1:0];
    sh_a = (c1 == '0) ? '0 : ((PROD_W-1)'(act) << (c1 - 1'b1));
    sh_b = (c2 == '0) ? '0 : ((PROD_W-1)'(act) << (32'(c2) - 1 + OFFS_B));
    sum  = sh_a + sh_b;
    prod = wgt[WGT_W-1] ? -$signed({1'b0, sum}) : $signed({1'b0, sum});
  end
endmodule
