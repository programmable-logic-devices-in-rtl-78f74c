// adaptive_phase: gain-scheduled integrator for adaptive homodyne phase measurement.
//
// The local-oscillator phase Phi is steered by the homodyne photocurrent I with
// dPhi(t) = I(t) / sqrt(t), t being the time since the start of the light pulse.
// The datapath is the paper's schematic: the sequencer's time signal addresses
// a block-RAM look-up table holding G(t) = 1/sqrt(t); a multiplier forms
// I_12 * G_16 = dphi_28; its top 12 bits (dphi_28[27:16]) are the increment
// dphi_12; an adder sums dphi_12 with the fed-back phase phi_21; the output
// phi_12 is phi_21[20:9]. Outside the pulse, and in the first cycle of each
// pulse, the sequencer opens the feedback switch, so each pulse integrates
// from zero (Phi = dPhi in its first step); the output is held at zero while
// the switch is open.
//
// Timing: time address -> LUT (1 cycle) -> multiplier (1 cycle) -> adder/
// accumulator (1 cycle) -> phi_12 output register (1 cycle). The integrator
// loop itself is one register, so Phi(t) = Phi(t-1) + dPhi(t) every cycle, as
// the paper's text states. (The paper's VHDL listing puts a second register in
// the loop, inside the process; this design follows the text's equation.)
// The gain table comes from LUT_FILE: entry a holds round(65535/sqrt(a+1)), a
// 16-bit unsigned gain, so the gain for time t is 1/sqrt(t/32 + 1) at full
// scale with the default TIME_SHIFT of 5 (this scaling is this design's choice;
// the paper gives only G = 1/sqrt(t)).
module adaptive_phase
  import pld_pkg::*;
#(
  parameter int unsigned TAU_EXPERIMENT = 5000,
  parameter int unsigned TAU_DEAD       = 1000,
  parameter int unsigned TIME_SHIFT     = 5,
  parameter string       LUT_FILE       = "rtl/gain_lut.hex"
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic signed [AP_CUR_W-1:0] i_cur,      // homodyne current I (ADC code)
  output logic signed [AP_OUT_W-1:0] phi_out,    // LO phase Phi to the DAC
  output logic                       integrate,  // high while a pulse is measured
  output logic                       frame_start // first cycle of each pulse
);

  logic [AP_TIME_W-1:0]          time_8;
  logic [AP_GAIN_W-1:0]          gtime_16;
  logic signed [AP_PROD_W-1:0]   dphi_28;
  logic signed [AP_DPHI_W-1:0]   dphi_12;
  logic signed [AP_PHI_W-1:0]    phi_21_a, phi_21_b;

  phase_sequencer #(
    .TAU_EXPERIMENT(TAU_EXPERIMENT),
    .TAU_DEAD      (TAU_DEAD),
    .TIME_SHIFT    (TIME_SHIFT),
    .ADDR_W        (AP_TIME_W)
  ) u_process (
    .clk, .rst,
    .integrate,
    .frame_start,
    .time_addr(time_8),
    .t()
  );

  // Gain look-up table; read-only here (WE tied low, DI looped back) as in the
  // paper's listing.
  ramblock #(
    .ADDR_W(AP_TIME_W), .DATA_W(AP_GAIN_W), .INIT_FILE(LUT_FILE)
  ) u_lut (
    .clk, .en(1'b1), .we(1'b0), .rst(1'b0),
    .addr(time_8), .di(gtime_16), .dout(gtime_16)
  );

  pipelined_multiplier #(.A_W(AP_CUR_W), .B_W(AP_GAIN_W)) u_mult (
    .clk, .a(i_cur), .b(gtime_16), .p(dphi_28)
  );

  // Trim the product back to 12 bits.
  always_comb dphi_12 = dphi_28[AP_PROD_W-1 -: AP_DPHI_W];

  // Feedback switch: closed while integrating, otherwise the adder sees zero.
  logic closed;
  always_comb closed   = integrate && !frame_start;
  always_comb phi_21_a = closed ? phi_21_b : '0;

  registered_adder #(.A_W(AP_DPHI_W), .B_W(AP_PHI_W)) u_adder (
    .clk, .a(dphi_12), .b(phi_21_a), .q(phi_21_b)
  );

  // Output register: the top 12 bits of the phase while integrating, else 0.
  always_ff @(posedge clk) begin
    if (rst) phi_out <= '0;
    else     phi_out <= closed ? phi_21_b[AP_PHI_W-1 -: AP_OUT_W] : '0;
  end

endmodule
