// tb_tensor_alu: random operands through every tensor-ALU operation, with
// and without the immediate, on 8 lanes; results and the clipped 4-bit
// activations are compared with values computed in the testbench.
module tb_tensor_alu;
  import msq_pkg::*;
  localparam int L = 8;
  int checks = 0, failures = 0;
  alu_op_e op;
  logic use_imm;
  logic signed [15:0] imm;
  logic [L-1:0][31:0] a, b, res;
  logic [L-1:0][3:0]  act;

  tensor_alu #(.LANES(L), .ACC_W(32), .ACT_W(4)) dut (.op, .use_imm, .imm, .a, .b, .res, .act);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      op      = alu_op_e'(t % 5);
      use_imm = (t / 5) % 2 == 1;
      imm     = (op == ALU_SHR) ? 16'($urandom_range(0, 12) - 4) : 16'($urandom_range(0, 60) - 30);
      for (int l = 0; l < L; l++) begin
        a[l] = 32'($urandom_range(0, 4000) - 2000);
        b[l] = (op == ALU_SHR) ? 32'($urandom_range(0, 10) - 3) : 32'($urandom_range(0, 200) - 100);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        int x, s, r, c;
        x = int'($signed(a[l]));
        s = use_imm ? int'(imm) : int'($signed(b[l]));
        case (op)
          ALU_ADD: r = x + s;
          ALU_MAX: r = (x > s) ? x : s;
          ALU_MIN: r = (x < s) ? x : s;
          ALU_SHR: r = (s >= 0) ? (x >>> s) : (x * (1 << (-s)));
          default: r = x * s;
        endcase
        c = (r < 0) ? 0 : (r > 15) ? 15 : r;
        checks++;
        if (int'($signed(res[l])) != r || int'(act[l]) != c) begin
          failures++;
          if (failures < 10) $display("mismatch op=%0d x=%0d s=%0d got %0d/%0d exp %0d/%0d",
                                      op, x, s, $signed(res[l]), act[l], r, c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
