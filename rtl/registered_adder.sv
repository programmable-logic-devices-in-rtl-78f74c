// registered_adder: clocked two's-complement adder.
//
// Q = A + B, registered once: the sum of the operands presented at one clock
// edge appears after the next edge. A is narrower than B and is sign-extended;
// the sum is B_W bits wide and wraps on overflow, as a fixed-width accumulator
// does. In the adaptive phase loop, A is the 12-bit increment dphi_12, B the
// 21-bit phase phi_21_a and Q the 21-bit phase phi_21_b; fed back through a
// register it integrates. The paper only names this block (a Xilinx adder core
// with ports A, B, Q, CLK); wrap-around on overflow is this design's choice.
module registered_adder #(
  parameter int unsigned A_W = 12,
  parameter int unsigned B_W = 21
) (
  input  logic                  clk,
  input  logic signed [A_W-1:0] a,
  input  logic signed [B_W-1:0] b,
  output logic signed [B_W-1:0] q
);

  always_ff @(posedge clk) q <= B_W'(b + B_W'(a));

endmodule
