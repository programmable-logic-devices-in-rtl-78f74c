// serial_adder: bit-serial two's-complement adder/subtractor.
//
// sum = a + b, or a - b when `sub` is high, computed one bit per clock from the
// least significant bit up by a single full adder whose carry is kept in a
// flip-flop; subtraction inverts b's bits and starts with a carry of 1. A W-bit
// sum therefore takes W clocks, which is where the second B_Y in the paper's
// IIR sample rate f_C / (2 B_Y) comes from (the FIR takes the first B_Y).
// The result wraps modulo 2**W.
//
// Interface and timing: pulse `start` for one cycle with the operands on a, b
// and sub; bit 0 is added in that same cycle. `sum` is valid, with `valid` high
// for one cycle, W cycles after the start cycle; the bits are collected in a
// separate shift register, so `sum` holds its value until the next result is
// complete. `start` is allowed whenever `busy` is low. The paper gives only the
// adder and its delay; this bit-serial form is this design's reading of it.
module serial_adder #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                sub,
  output logic signed [W-1:0] sum,
  output logic                valid,
  output logic                busy
);

  localparam int unsigned C_W = $clog2(W + 1);

  logic [W-1:0]   ra, rb, acc;
  logic           carry, sub_r;
  logic [C_W-1:0] cnt, ce;
  logic           abit, bbit, cin, s, cout, last;

  always_comb begin
    abit = start ? a[0] : ra[0];
    bbit = start ? (b[0] ^ sub) : (rb[0] ^ sub_r);
    cin  = start ? sub : carry;
    s    = abit ^ bbit ^ cin;
    cout = (abit & bbit) | (abit & cin) | (bbit & cin);
    ce   = start ? '0 : cnt;
    last = (ce == C_W'(W - 1));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ra <= '0; rb <= '0; carry <= 1'b0; sub_r <= 1'b0; cnt <= '0;
      acc <= '0; sum <= '0; busy <= 1'b0; valid <= 1'b0;
    end else if (start || busy) begin
      if (start) begin
        ra    <= a >> 1;
        rb    <= b >> 1;
        sub_r <= sub;
      end else begin
        ra <= ra >> 1;
        rb <= rb >> 1;
      end
      carry <= cout;
      acc   <= {s, acc[W-1:1]};
      if (last) sum <= {s, acc[W-1:1]};
      cnt   <= ce + C_W'(1);
      busy  <= !last;
      valid <= last;
    end else begin
      valid <= 1'b0;
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (rst) start |-> !busy);

endmodule
