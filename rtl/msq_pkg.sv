// msq_pkg: types and constants shared by the mixed-scheme (fixed-point + SP2)
// GEMM accelerator.
//
// The accelerator follows a decoupled load / compute / store organisation:
// 128-bit instructions are fetched from DRAM and dispatched to three modules
// that synchronise through dependency tokens. This package fixes the
// instruction encoding, the micro-op format, the memory-type codes and the
// default sizes of the main configuration (Bat=4, Blk_in=16,
// Blk_out,fixed=16, Blk_out,sp2=32, 4-bit weights and activations).
//
// Weight encodings (4 bits, sign-magnitude, sign in the MSB):
//   fixed-point : {sign, mag[2:0]}, value = +-mag (scale alpha/7 applied later)
//   SP2         : {sign, c1[M1-1:0], c2[M2-1:0]}, m1 = 2, m2 = 1.
//                 q1 = 0 if c1 == 0, else 2^-(2^m1 - c1);
//                 q2 = 0 if c2 == 0, else 2^-(2^m2 - c2);
//                 value = +-(q1 + q2). In integer units of 2^-(2^m1-1) this is
//                 (c1 ? 1 << (c1-1) : 0) + (c2 ? 1 << (c2-1 + 2^m1 - 2^m2) : 0).
// The sizes and the sign-magnitude formats come from the paper; the bit order
// of the SP2 code fields and everything about instructions are this design's.
package msq_pkg;

  // ---------------- default sizes (main configuration) ----------------
  localparam int unsigned BAT_D         = 4;
  localparam int unsigned BLK_IN_D      = 16;
  localparam int unsigned BLK_OUT_FIX_D = 16;
  localparam int unsigned BLK_OUT_SP2_D = 32;
  localparam int unsigned ACT_W_D       = 4;   // n
  localparam int unsigned WGT_W_D       = 4;   // m
  localparam int unsigned M1_D          = 2;   // m1 (m1 + m2 = m - 1, m1 >= m2)
  localparam int unsigned M2_D          = 1;   // m2
  localparam int unsigned ACC_W_D       = 32;
  localparam int unsigned DRAM_W_D      = 64;
  localparam int unsigned DRAM_AW_D     = 32;  // word address width

  // buffer depths (rows)
  localparam int unsigned INP_DEPTH_D   = 512;
  localparam int unsigned WGT_DEPTH_D   = 512;
  localparam int unsigned ACC_DEPTH_D   = 256;
  localparam int unsigned UOP_DEPTH_D   = 1024;
  localparam int unsigned IDX_DEPTH_D   = 64;
  localparam int unsigned IDX_W         = 16;  // global filter index width

  localparam int unsigned INSN_W        = 128;
  localparam int unsigned UOP_W         = 32;

  // ---------------- opcodes ----------------
  typedef enum logic [2:0] {
    OP_LOAD   = 3'd0,
    OP_STORE  = 3'd1,
    OP_GEMM   = 3'd2,
    OP_ALU    = 3'd3,
    OP_FINISH = 3'd4
  } opcode_e;

  typedef enum logic [3:0] {
    MEM_INP     = 4'd0,
    MEM_WGT_FIX = 4'd1,
    MEM_WGT_SP2 = 4'd2,
    MEM_IDX_FIX = 4'd3,
    MEM_IDX_SP2 = 4'd4,
    MEM_UOP     = 4'd5
  } mem_e;

  typedef enum logic [2:0] {
    ALU_ADD = 3'd0,
    ALU_MAX = 3'd1,
    ALU_MIN = 3'd2,
    ALU_SHR = 3'd3,
    ALU_MUL = 3'd4
  } alu_op_e;

  // Dependency flags: "prev"/"next" are the neighbouring modules in the
  // load -> compute -> store chain.
  typedef struct packed {
    logic pop_prev;
    logic pop_next;
    logic push_prev;
    logic push_next;
  } dep_t;

  localparam int unsigned PAYLOAD_W = INSN_W - 3 - 4;  // 121

  // LOAD: 2-D transfer of rows; row (y, x) is read from DRAM word address
  // dram_base + (y * x_stride + x) * row_beats and written to buffer row
  // sram_base + y * x_size + x.
  typedef struct packed {
    logic [20:0] pad;
    logic [15:0] x_stride;
    logic [15:0] x_size;
    logic [15:0] y_size;
    logic [31:0] dram_base;
    logic [15:0] sram_base;
    mem_e        mem_type;
  } mem_insn_t;

  // STORE: n_rows output-buffer rows starting at sram_base; row i is pixel
  // pix0 + i of the layer. Element (b, c) of a row is written to nibble
  // address dram_base + ((g / BLK_IN) * n_pix + pix0 + i) * BAT * BLK_IN
  //                   + b * BLK_IN + g % BLK_IN, with g = index[idx_row][c].
  typedef struct packed {
    logic [4:0]  pad;
    logic [15:0] pix0;
    logic [15:0] n_pix;
    logic [15:0] idx_row;
    logic [15:0] n_rows;
    logic [31:0] dram_base;
    logic [15:0] sram_base;
    logic [3:0]  core;          // 0: fixed, 1: SP2
  } store_insn_t;

  // GEMM: for i0 < iter_out, i1 < iter_in, u in [uop_bgn, uop_end):
  //   acc = uop.acc + i0*acc_f0 + i1*acc_f1 (same for inp and wgt)
  //   reset ? R[acc] = 0 : R[acc] += GEMM(I[inp], W[wgt])  in both cores.
  typedef struct packed {
    logic [11:0] wgt_f1;
    logic [11:0] wgt_f0;
    logic [11:0] inp_f1;
    logic [11:0] inp_f0;
    logic [11:0] acc_f1;
    logic [11:0] acc_f0;
    logic [11:0] iter_in;
    logic [11:0] iter_out;
    logic [11:0] uop_end;
    logic [11:0] uop_bgn;
    logic        reset;
  } gemm_insn_t;

  // ALU: same loop nest; dst = uop.acc + ..., src = uop.inp + ...
  //   R[dst] = op(R[dst], use_imm ? imm : R[src]) in the cores selected by
  //   core_mask (bit0 fixed, bit1 SP2); the clipped n-bit result is also
  //   written to the core's output buffer row dst.
  typedef struct packed {
    logic [2:0]  pad;
    logic [1:0]  core_mask;
    logic [11:0] src_f1;
    logic [11:0] src_f0;
    logic [11:0] dst_f1;
    logic [11:0] dst_f0;
    logic [11:0] iter_in;
    logic [11:0] iter_out;
    logic [11:0] uop_end;
    logic [11:0] uop_bgn;
    logic signed [15:0] imm;
    logic        use_imm;
    alu_op_e     op;
  } alu_insn_t;

  typedef struct packed {
    logic [PAYLOAD_W-1:0] payload;
    dep_t                 dep;
    opcode_e              opcode;
  } insn_t;

  // micro-op held in the micro-op cache
  typedef struct packed {
    logic [10:0] wgt_idx;
    logic [10:0] inp_idx;
    logic [9:0]  acc_idx;
  } uop_t;

  // ---------------- arithmetic helpers ----------------
  // number of DRAM beats needed for a row of `bits` bits
  function automatic int unsigned beats_for(int unsigned bits, int unsigned dram_w);
    return (bits + dram_w - 1) / dram_w;
  endfunction

endpackage
