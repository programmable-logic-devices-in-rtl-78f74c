// cavity_lock: two-arm digital servo for a Pound-Drever-Hall Fabry-Perot lock.
//
// One error signal, demodulated from the light reflected by the cavity, feeds
// two IIR filters in parallel: T_upper drives the fast arm (a VCO driving an
// acousto-optic modulator that shifts the laser frequency, dominant from
// ~100 Hz through the servo's unity-gain point), T_lower the slow arm (the
// piezo that sets the cavity length, dominant below ~100 Hz). Both filters run
// at f_C/(2 B_Y) and have the structure of iir_filter; their coefficients, which
// the paper derives offline from the measured plant (T_U = T_LP1 T_LP2^2 /
// (T_C T_V), T_L a low-pass with a corner of a few Hz), are written through
// `coef`, with coef_sel = 0 for T_upper and 1 for T_lower.
//
// Timing: each output holds its last value and updates every 2*BY cycles
// (`upper_valid`, `lower_valid`); the two filters start together after reset,
// so they stay in step. The default filter order N = 3 is this design's
// reading of T_U (three poles from T_LP1 T_LP2^2, two zeros from 1/(T_C T_V));
// the paper gives no order. The coefficient-select port is this design's choice.
module cavity_lock
  import pld_pkg::*;
#(
  parameter int unsigned N  = 3,
  parameter int unsigned BY = IIR_BY
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] err,
  input  coef_wr_t                coef,
  input  logic                    coef_sel,
  output logic signed [DAC_W-1:0] aom_out,
  output logic signed [DAC_W-1:0] pzt_out,
  output logic                    upper_valid,
  output logic                    lower_valid
);

  coef_wr_t coef_upper, coef_lower;

  always_comb begin
    coef_upper    = coef;
    coef_lower    = coef;
    coef_upper.we = coef.we && !coef_sel;
    coef_lower.we = coef.we &&  coef_sel;
  end

  iir_filter #(.N(N), .U_W(ADC_W), .BY(BY)) u_t_upper (
    .clk, .rst, .u(err), .coef(coef_upper),
    .y_12(aom_out), .y(), .sample(), .y_valid(upper_valid)
  );

  iir_filter #(.N(N), .U_W(ADC_W), .BY(BY)) u_t_lower (
    .clk, .rst, .u(err), .coef(coef_lower),
    .y_12(pzt_out), .y(), .sample(), .y_valid(lower_valid)
  );

endmodule
