// dep_token: dependency-token queue between two of the Load, Compute and
// Store modules (the green arrows between them in the architecture).
//
// The producer pushes a token when it finishes an instruction whose
// push_prev/push_next flag points at the consumer; the consumer may start an
// instruction whose pop flag points back only while a token is available,
// and pops it as it starts. Tokens are counted, up to 2^CNT_W - 1. push and
// pop may happen in the same cycle. The token scheme is this design's reading
// of the arrows; the paper does not describe it.
module dep_token #(
  parameter int unsigned CNT_W = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  logic pop,
  output logic avail,
  output logic full
);
  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else cnt <= cnt + CNT_W'(push) - CNT_W'(pop);
  end

  assign avail = (cnt != '0);
  assign full  = (cnt == '1);

  // a token is never popped from an empty queue nor pushed into a full one
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> avail);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (push && !pop) |-> !full);
endmodule
