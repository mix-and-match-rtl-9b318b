// tensor_alu: element-wise vector unit of the compute module.
//
// Applies one operation to every lane of a register-file row:
//   ADD  res = a + s           (bias, batch-norm offset)
//   MAX  res = max(a, s)       (ReLU with s = 0, max pooling with s = row)
//   MIN  res = min(a, s)       (clipping)
//   SHR  res = a >>> s, or a << -s for negative s (requantisation)
//   MUL  res = a * s           (batch-norm / scaling-factor multiply)
// where s is the signed immediate or the lane of the second source row. It
// also returns each result clipped to the n-bit unsigned activation range
// [0, 2^n - 1], the value written to the output buffer. Combinational.
// The paper says the tensor ALU computes element-wise operations (e.g. the
// activation) and that batch normalisation, ReLU and pooling are merged into
// the GEMM stage; the operation set is this design's choice.
module tensor_alu
  import msq_pkg::*;
#(
  parameter int unsigned LANES = BAT_D * (BLK_OUT_FIX_D + BLK_OUT_SP2_D),
  parameter int unsigned ACC_W = ACC_W_D,
  parameter int unsigned ACT_W = ACT_W_D
) (
  input  alu_op_e                       op,
  input  logic                          use_imm,
  input  logic signed [15:0]            imm,
  input  logic [LANES-1:0][ACC_W-1:0]   a,
  input  logic [LANES-1:0][ACC_W-1:0]   b,
  output logic [LANES-1:0][ACC_W-1:0]   res,
  output logic [LANES-1:0][ACT_W-1:0]   act
);
  localparam logic signed [ACC_W-1:0] ACT_MAX = ACC_W'((1 << ACT_W) - 1);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] x, s, r;
      logic signed [7:0]       sh;
      x  = $signed(a[l]);
      s  = use_imm ? ACC_W'(imm) : $signed(b[l]);
      sh = s[7:0];
      unique case (op)
        ALU_ADD: r = x + s;
        ALU_MAX: r = (x > s) ? x : s;
        ALU_MIN: r = (x < s) ? x : s;
        ALU_SHR: r = (sh >= 0) ? (x >>> sh) : (x <<< (-sh));
        ALU_MUL: r = x * s;
        default: r = x;
      endcase
      res[l] = r;
      if (r < 0)            act[l] = '0;
      else if (r > ACT_MAX) act[l] = ACT_MAX[ACT_W-1:0];
      else                  act[l] = r[ACT_W-1:0];
    end
  end
endmodule
