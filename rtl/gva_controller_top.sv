// gva_controller_top: FPGA controller for the adaptive phase experiment.
//
// One FPGA between 12-bit ADCs and 12-bit DACs clocked at 100 MHz carries the
// two controllers of the experiment: the cavity lock that filters the laser's
// intensity noise (error signal in, VCO-AOM and PZT drives out) and the
// adaptive homodyne phase measurement (photocurrent in, local-oscillator phase
// out). A third channel passes its ADC code straight to a DAC, the identity
// configuration whose delay the paper measures. Every converter word passes
// through io_buffer stages, 2 at the input and 2 at the output, so the identity
// path adds the 4 cycles the paper attributes to the FPGA's buffers.
//
// The ADCs, DACs and clock generation are outside this module: ADC codes come
// in as ports (two's-complement), DAC codes go out as ports, and `clk` is the
// 100 MHz system clock. Putting both controllers on one chip and the channel
// assignment (adc_err -> dac_aom/dac_pzt, adc_homodyne -> dac_lo_phase,
// adc_aux -> dac_aux) are this design's choices: the paper describes the two
// controllers separately and uses a board with four inputs and four outputs.
// The IIR coefficient port is brought out for the host that loads them.
module gva_controller_top
  import pld_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] adc_err,
  input  logic signed [ADC_W-1:0] adc_homodyne,
  input  logic signed [ADC_W-1:0] adc_aux,
  input  coef_wr_t                coef,
  input  logic                    coef_sel,
  output logic signed [DAC_W-1:0] dac_aom,
  output logic signed [DAC_W-1:0] dac_pzt,
  output logic signed [DAC_W-1:0] dac_lo_phase,
  output logic signed [DAC_W-1:0] dac_aux,
  output logic                    lock_update,
  output logic                    pulse_active
);

  localparam int unsigned IN_DEPTH  = 2;
  localparam int unsigned OUT_DEPTH = 2;

  logic signed [ADC_W-1:0] err_i, hom_i, aux_i;
  logic signed [DAC_W-1:0] aom_o, pzt_o, phi_o;
  logic                    lower_valid, frame_start;

  io_buffer #(.W(ADC_W), .DEPTH(IN_DEPTH)) u_in_err (.clk, .rst, .d(adc_err),      .q(err_i));
  io_buffer #(.W(ADC_W), .DEPTH(IN_DEPTH)) u_in_hom (.clk, .rst, .d(adc_homodyne), .q(hom_i));
  io_buffer #(.W(ADC_W), .DEPTH(IN_DEPTH)) u_in_aux (.clk, .rst, .d(adc_aux),      .q(aux_i));

  cavity_lock u_lock (
    .clk, .rst, .err(err_i), .coef, .coef_sel,
    .aom_out(aom_o), .pzt_out(pzt_o),
    .upper_valid(lock_update), .lower_valid
  );

  adaptive_phase u_phase (
    .clk, .rst, .i_cur(hom_i), .phi_out(phi_o),
    .integrate(pulse_active), .frame_start
  );

  io_buffer #(.W(DAC_W), .DEPTH(OUT_DEPTH)) u_out_aom (.clk, .rst, .d(aom_o), .q(dac_aom));
  io_buffer #(.W(DAC_W), .DEPTH(OUT_DEPTH)) u_out_pzt (.clk, .rst, .d(pzt_o), .q(dac_pzt));
  io_buffer #(.W(DAC_W), .DEPTH(OUT_DEPTH)) u_out_phi (.clk, .rst, .d(phi_o), .q(dac_lo_phase));
  io_buffer #(.W(DAC_W), .DEPTH(OUT_DEPTH)) u_out_aux (.clk, .rst, .d(aux_i), .q(dac_aux));

endmodule
