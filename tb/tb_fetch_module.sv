// tb_fetch_module: places a stream of random instructions in a DRAM model,
// starts the fetch module with randomly stalling queues and checks that
// every instruction reaches the right queue (load / compute / store), in
// order and unchanged, and that a full queue stalls fetching.
module tb_fetch_module;
  import msq_pkg::*;
  localparam int NI = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy;
  logic [31:0] stall_cycles;
  logic req_valid, req_ready, resp_valid, resp_last;
  logic [31:0] req_addr;
  logic [7:0]  req_len;
  logic [63:0] resp_data;
  logic ld_valid, ld_ready, cp_valid, cp_ready, st_valid, st_ready;
  insn_t insn;
  insn_t prog [NI];
  int exp_q [NI];
  int nxt [3] = '{0, 0, 0};
  int got = 0;

  fetch_module dut (.clk, .rst_n, .start, .insn_addr(32'd100), .insn_count(16'(NI)),
    .busy, .stall_cycles, .req_valid, .req_ready, .req_addr, .req_len, .resp_valid,
    .resp_data, .resp_last, .ld_valid, .ld_ready, .cp_valid, .cp_ready, .st_valid,
    .st_ready, .insn);
  dram_model #(.DEPTH(1024)) u_dram (.clk, .rst_n, .req_valid, .req_ready, .req_addr,
    .req_len, .resp_valid, .resp_data, .resp_last, .wr_valid(1'b0), .wr_ready(),
    .wr_addr('0), .wr_data('0), .wr_strb('0));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // queue consumers: ready at random, store queue blocked for a while
  always @(negedge clk) begin
    ld_ready <= ($urandom_range(0, 3) == 0);
    cp_ready <= ($urandom_range(0, 1) == 0);
    st_ready <= ($urandom_range(0, 2) == 0);
  end

  // find which queue index (0 load, 1 compute, 2 store) instruction k belongs to
  function automatic int search(int q, int from);
    for (int k = from; k < NI; k++) if (exp_q[k] == q) return k;
    return -1;
  endfunction

  int pos [3] = '{0, 0, 0};
  always @(posedge clk) begin
    if (rst_n) begin
      int qs [3];
      qs = '{int'(ld_valid && ld_ready), int'(cp_valid && cp_ready), int'(st_valid && st_ready)};
      for (int q = 0; q < 3; q++) begin
        if (qs[q] != 0) begin
          int k;
          k = search(q, pos[q]);
          checks++;
          if (k < 0 || insn !== prog[k]) begin
            failures++;
            $display("queue %0d got wrong instruction %h", q, insn);
          end
          pos[q] = k + 1;
          got++;
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < NI; k++) begin
      mem_insn_t m;
      logic [127:0] raw;
      raw = {$urandom, $urandom, $urandom, $urandom};
      prog[k] = insn_t'(raw);
      prog[k].opcode = opcode_e'($urandom_range(0, 4));
      m = mem_insn_t'(prog[k].payload);
      if (prog[k].opcode == OP_LOAD) begin
        m.mem_type = mem_e'($urandom_range(0, 5));
        prog[k].payload = m;
      end
      exp_q[k] = (prog[k].opcode == OP_STORE) ? 2 :
                 (prog[k].opcode == OP_LOAD && m.mem_type != MEM_UOP) ? 0 : 1;
      u_dram.mem[100 + 2*k]     = prog[k][63:0];
      u_dram.mem[100 + 2*k + 1] = prog[k][127:64];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (got == NI);
    repeat (5) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy"); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no stall observed"); end
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
