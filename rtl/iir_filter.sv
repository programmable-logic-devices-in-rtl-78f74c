// iir_filter: IIR filter built from two bit-serial FIR blocks and one adder.
//
// It evaluates the difference equation
//   y(n) = sum_{i=0}^{N} a(i) u(n-i) - sum_{i=1}^{N} b(i) y(n-i)
// (b(0) = 1), the discrete form of a continuous transfer function G_C(s) of
// order N. As in the paper's block diagram, FIR a filters the 12-bit input u,
// FIR b filters the fed-back output y, a 'T' block trims each result back to
// the internal y width, the adder forms y = 'au' + '-by', and a last 'T' block
// trims y to the 12-bit output y_12.
//
// Number format (this design's choice; the paper says only that the T blocks
// drop least significant bits): coefficients are signed COEF_W-bit numbers with
// COEF_FRAC fraction bits; u and y_12 are integer DAC/ADC codes; y keeps
// BY - U_W fraction bits below the same integer range. The trims are arithmetic
// right shifts by COEF_FRAC - (BY - U_W) for 'au', COEF_FRAC for 'by' and
// BY - U_W for y_12, each keeping the low BY bits; overflow wraps, so the
// coefficients must be scaled so that y stays within the 12-bit range.
//
// Timing: everything is bit-serial. FIR b needs BY clocks (its input is y) and
// the adder another BY, so one output sample takes exactly 2*BY clocks, the
// paper's f_C/(2 B_Y) (64 clocks, 1.5625 MHz at 100 MHz with B_Y = 32). FIR a
// (U_W clocks) runs alongside FIR b. The input u is sampled in the cycle in
// which `sample` is high; the new y appears 2*BY cycles later with `y_valid`
// high for one cycle, and that same cycle samples the next u. So u is
// decimated to one sample per 2*BY clocks and y_12 holds between updates.
//
// Coefficients reset to a(0) = 1, all others 0 (a plain pass-through) and are
// written through `coef` (set, index, value) at any time. For COEF_B the index
// is i = 1..N. The write port is this design's addition: the paper compiles the
// coefficients into the filter.
module iir_filter
  import pld_pkg::*;
#(
  parameter int unsigned N         = 3,
  parameter int unsigned U_W       = ADC_W,
  parameter int unsigned BY        = IIR_BY,
  parameter int unsigned COEF_W    = 32,
  parameter int unsigned COEF_FRAC = 24
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic signed [U_W-1:0] u,
  input  coef_wr_t              coef,
  output logic signed [U_W-1:0] y_12,
  output logic signed [BY-1:0]  y,
  output logic                  sample,
  output logic                  y_valid
);

  localparam int unsigned Y_FRAC   = BY - U_W;
  localparam int unsigned A_TRIM   = COEF_FRAC - Y_FRAC;
  localparam int unsigned B_TRIM   = COEF_FRAC;
  localparam int unsigned AW       = U_W + COEF_W + $clog2(N + 1);
  localparam int unsigned BW       = BY + COEF_W + $clog2(N);
  localparam logic [N:0][COEF_W-1:0] A_INIT = ((N+1)*COEF_W)'(64'(1) << COEF_FRAC);

  logic signed [AW-1:0] fa_y;
  logic signed [BW-1:0] fb_y;
  logic                 fa_valid, fa_busy, fb_valid, fb_busy;
  logic signed [BY-1:0] au, by;
  logic signed [BY-1:0] sum;
  logic                 add_valid, add_busy;
  logic                 started;
  localparam int unsigned AI_W = (N + 1 > 1) ? $clog2(N + 1) : 1;
  localparam int unsigned BI_W = (N > 1) ? $clog2(N) : 1;
  logic [AI_W-1:0] a_idx;
  logic [BI_W-1:0] b_idx;

  // A new sample starts right after reset and then every time y is produced.
  always_comb sample = !rst && (!started || add_valid);
  always_comb y_valid = add_valid;

  always_ff @(posedge clk) begin
    if (rst) started <= 1'b0;
    else if (sample) started <= 1'b1;
  end

  always_comb begin
    a_idx = AI_W'(coef.idx);
    b_idx = BI_W'(coef.idx - 4'd1);
  end

  fir_serial #(
    .NTAPS(N + 1), .X_W(U_W), .COEF_W(COEF_W), .COEF_INIT(A_INIT)
  ) u_fir_a (
    .clk, .rst, .start(sample), .x_in(u),
    .coef_we(coef.we && coef.set == COEF_A), .coef_idx(a_idx), .coef_data(coef.data),
    .y(fa_y), .valid(fa_valid), .busy(fa_busy)
  );

  // FIR b gets y(n-1) as its newest input, so its tap 0 holds b(1).
  fir_serial #(
    .NTAPS(N), .X_W(BY), .COEF_W(COEF_W)
  ) u_fir_b (
    .clk, .rst, .start(sample), .x_in(sum),
    .coef_we(coef.we && coef.set == COEF_B && coef.idx != 4'd0), .coef_idx(b_idx),
    .coef_data(coef.data),
    .y(fb_y), .valid(fb_valid), .busy(fb_busy)
  );

  // 'T' blocks: drop least significant bits back to the y format.
  always_comb begin
    au = BY'(fa_y >>> A_TRIM);
    by = BY'(fb_y >>> B_TRIM);
  end

  // y = au + (-by); starts when FIR b (the slower FIR) has finished.
  serial_adder #(.W(BY)) u_add (
    .clk, .rst, .start(fb_valid), .a(au), .b(by), .sub(1'b1),
    .sum, .valid(add_valid), .busy(add_busy)
  );

  // FIR a (U_W clocks) always finishes before FIR b (BY clocks) is read.
  a_fir_a_first: assert property (@(posedge clk) disable iff (rst) fb_valid |-> !fa_busy);
  a_adder_free:  assert property (@(posedge clk) disable iff (rst) fb_valid |-> !add_busy);

  always_comb begin
    y    = sum;
    y_12 = sum[BY-1 -: U_W];
  end

endmodule
