// pld_pkg: widths and constants shared by the FPGA controller blocks.
//
// The board digitises every input with a 12-bit ADC and drives every output
// through a 12-bit DAC, both clocked at the 100 MHz system clock; those widths
// and the clock rate follow the paper. The IIR filters keep their output
// internally on B_Y = 32 bits, also the paper's number. The adaptive phase
// datapath widths (12-bit current, 8-bit time address, 16-bit gain, 28-bit
// product, 21-bit phase accumulator) are the bus names of the paper's VHDL
// listing. Everything else here is this design's choice and is marked so.
package pld_pkg;

  // Converter widths (paper: "Both the ADCs and DACs have 12 bit resolution").
  localparam int unsigned ADC_W = 12;
  localparam int unsigned DAC_W = 12;

  // System clock (paper: 100 MHz), used only for documentation and testbenches.
  localparam int unsigned F_CLK_HZ = 100_000_000;

  // Internal width of y(n) in the IIR filters (paper: B_Y = 32 bits).
  localparam int unsigned IIR_BY = 32;

  // Adaptive phase bus widths, from the bus names in the paper's VHDL listing
  // (time_8, Gtime_16, I_12, dphi_28, dphi_12, phi_21, phi_12).
  localparam int unsigned AP_TIME_W  = 8;
  localparam int unsigned AP_GAIN_W  = 16;
  localparam int unsigned AP_CUR_W   = 12;
  localparam int unsigned AP_PROD_W  = 28;
  localparam int unsigned AP_DPHI_W  = 12;
  localparam int unsigned AP_PHI_W   = 21;
  localparam int unsigned AP_OUT_W   = 12;

  // Block RAM size of the XCV1000E (paper: 160 blocks of 4096 = 2^12 bits).
  localparam int unsigned RAMBLOCK_BITS = 4096;

  // Which of the two IIR coefficient sets a coefficient write addresses.
  typedef enum logic {
    COEF_A = 1'b0,   // feed-forward a(i), i = 0..N
    COEF_B = 1'b1    // feedback b(i), i = 1..N (b(0) = 1 is implied)
  } coef_set_e;

  // One coefficient write into an IIR filter.
  typedef struct packed {
    logic      we;
    coef_set_e set;
    logic [3:0] idx;
    logic signed [31:0] data;
  } coef_wr_t;

endpackage
