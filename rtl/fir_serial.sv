// fir_serial: bit-serial FIR filter, y(n) = sum_{i=0}^{NTAPS-1} c(i) x(n-i).
//
// The filter handles its input one bit per clock, as the FPGA vendor's FIR
// core the paper uses does, so one output needs X_W clocks and the sample rate
// is f_C / X_W (the paper's f_F = f_C / B_U). Each clock it adds up the
// coefficients of all taps whose current input bit is 1 (the "distributed
// arithmetic" partial sum) and folds that sum into an accumulator by Horner's
// rule, most significant bit first: the sign bit's partial sum is subtracted,
// the others added, with the accumulator doubled in between. The result is
// exact (ACC_W = X_W + COEF_W + clog2(NTAPS) bits); trimming it is left to the
// user, as the paper's IIR does with its 'T' blocks.
//
// Interface and timing: pulse `start` for one cycle with the new sample on
// `x_in`; it enters the delay line at that edge and its top bit is processed in
// the same cycle. `y` is valid, with `valid` high for one cycle, X_W cycles
// after the start cycle, and holds until the next start. `start` may be given
// whenever `busy` is low, including the cycle in which `valid` is high, which
// gives one output every X_W cycles. Coefficients sit in registers, reset to
// COEF_INIT and writable at any time through coef_we / coef_idx / coef_data
// (the paper sets them as core parameters computed offline; the write port, the
// reset values and the adder-tree partial sum instead of a ROM are this design's
// choices).
module fir_serial #(
  parameter int unsigned NTAPS  = 4,
  parameter int unsigned X_W    = 12,
  parameter int unsigned COEF_W = 32,
  parameter int unsigned ACC_W  = X_W + COEF_W + $clog2(NTAPS),
  parameter logic [NTAPS-1:0][COEF_W-1:0] COEF_INIT = '0,
  parameter int unsigned IDX_W  = (NTAPS > 1) ? $clog2(NTAPS) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic signed [X_W-1:0]    x_in,
  input  logic                     coef_we,
  input  logic [IDX_W-1:0]         coef_idx,
  input  logic signed [COEF_W-1:0] coef_data,
  output logic signed [ACC_W-1:0]  y,
  output logic                     valid,
  output logic                     busy
);

  localparam int unsigned K_W = (X_W > 1) ? $clog2(X_W) : 1;

  logic signed [X_W-1:0]    x   [NTAPS];   // delay line, x[0] newest
  logic signed [X_W-1:0]    xe  [NTAPS];   // delay line as seen this cycle
  logic signed [COEF_W-1:0] c   [NTAPS];
  logic [K_W-1:0]           k, ke;         // bit being processed
  logic signed [ACC_W-1:0]  partial, acc_next;

  always_comb begin
    for (int i = 0; i < NTAPS; i++) begin
      if (!start)      xe[i] = x[i];
      else if (i == 0) xe[i] = x_in;
      else             xe[i] = x[i-1];
    end
    ke = start ? K_W'(X_W - 1) : k;
    partial = '0;
    for (int i = 0; i < NTAPS; i++)
      if (xe[i][ke]) partial = partial + ACC_W'(c[i]);
    if (ke == K_W'(X_W - 1)) acc_next = -partial;
    else                     acc_next = (y <<< 1) + partial;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NTAPS; i++) begin
        x[i] <= '0;
        c[i] <= COEF_INIT[i];
      end
      k     <= '0;
      y     <= '0;
      busy  <= 1'b0;
      valid <= 1'b0;
    end else begin
      if (coef_we && (32'(coef_idx) < NTAPS)) c[coef_idx] <= coef_data;
      if (start) x <= xe;
      if (start || busy) begin
        y     <= acc_next;
        k     <= ke - K_W'(1);
        busy  <= (ke != '0);
        valid <= (ke == '0);
      end else begin
        valid <= 1'b0;
      end
    end
  end

  // A new sample may only be started when the previous one is finished.
  a_no_overlap: assert property (@(posedge clk) disable iff (rst) start |-> !busy);

endmodule
