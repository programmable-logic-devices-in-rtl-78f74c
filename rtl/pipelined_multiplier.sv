// pipelined_multiplier: clocked multiplier of a signed sample by an unsigned gain.
//
// P = A * B, registered once, so the product of the operands presented at one
// clock edge appears after the next edge (one cycle of latency, one product per
// cycle). A is a signed two's-complement sample (the 12-bit photocurrent I in
// the adaptive phase loop), B an unsigned gain word (the 16-bit LUT output
// G(t)); the product is A_W + B_W bits wide, the 28-bit dphi_28 of the paper's
// listing, and is always exact. The paper only names this block (a Xilinx
// multiplier core with ports A, B, CLK, P); the signed-by-unsigned operand
// types and the single register stage are this design's choices.
module pipelined_multiplier #(
  parameter int unsigned A_W = 12,
  parameter int unsigned B_W = 16
) (
  input  logic                       clk,
  input  logic signed [A_W-1:0]      a,
  input  logic        [B_W-1:0]      b,
  output logic signed [A_W+B_W-1:0]  p
);

  logic signed [A_W+B_W-1:0] prod;

  // Zero-extend B by one bit so that it is multiplied as a positive number.
  always_comb prod = (A_W+B_W)'(a * $signed({1'b0, b}));

  always_ff @(posedge clk) p <= prod;

endmodule
