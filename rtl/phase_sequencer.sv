// phase_sequencer: the timing process of the adaptive phase measurement.
//
// It keeps a cycle counter t that runs through a fixed frame of
// TAU_EXPERIMENT + TAU_DEAD clock cycles and then starts again: while
// t < TAU_EXPERIMENT the pulse is being measured and `integrate` is high;
// during the rest of the frame (the dead time between pulses) it is low, which
// clears the phase integrator. The counter is also the argument of the gain
// look-up table: `time_addr` is t divided by 2**TIME_SHIFT and held at the last
// table entry if it would pass it.
//
// The counting follows the paper's VHDL process exactly: at every rising edge,
// integrate if t < tau_experiment; if t = tau_experiment + tau_dead, set t to 0;
// then increment t. So after the first frame t runs 1 .. TAU_EXPERIMENT +
// TAU_DEAD, `integrate` is high for TAU_EXPERIMENT-1 cycles of every frame and
// the frame repeats every TAU_EXPERIMENT + TAU_DEAD cycles. `frame_start` pulses
// for the one cycle in which t = 1, the first integrating cycle of a pulse.
//
// Paper numbers: the 50 us pulse at 100 MHz gives TAU_EXPERIMENT = 5000. The
// paper gives no dead time (TAU_DEAD = 1000 is this design's choice) and
// converts t to the 8-bit address with a plain int_to_bus; because 5000 cycles
// do not fit in 8 bits, this design divides by 2**TIME_SHIFT = 32 and saturates.
// The synchronous reset `rst` is this design's addition: it puts t at the last
// cycle of the dead time, so the first pulse starts cleanly one cycle after
// reset is released.
module phase_sequencer #(
  parameter int unsigned TAU_EXPERIMENT = 5000,
  parameter int unsigned TAU_DEAD       = 1000,
  parameter int unsigned TIME_SHIFT     = 5,
  parameter int unsigned ADDR_W         = 8,
  parameter int unsigned CNT_W          = $clog2(TAU_EXPERIMENT + TAU_DEAD + 1)
) (
  input  logic              clk,
  input  logic              rst,
  output logic              integrate,
  output logic              frame_start,
  output logic [ADDR_W-1:0] time_addr,
  output logic [CNT_W-1:0]  t
);

  localparam int unsigned FRAME  = TAU_EXPERIMENT + TAU_DEAD;
  localparam int unsigned ADDR_MAX = 2**ADDR_W - 1;
  localparam int unsigned ADDR_RST = ((FRAME >> TIME_SHIFT) > ADDR_MAX) ? ADDR_MAX
                                                                        : (FRAME >> TIME_SHIFT);

  logic [CNT_W-1:0] t_next;
  logic [CNT_W-1:0] t_scaled;

  always_comb begin
    t_next   = (t == CNT_W'(FRAME)) ? CNT_W'(1) : t + CNT_W'(1);
    t_scaled = t_next >> TIME_SHIFT;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      t         <= CNT_W'(FRAME);
      time_addr <= ADDR_W'(ADDR_RST);
    end else begin
      t         <= t_next;
      time_addr <= (t_scaled > CNT_W'(ADDR_MAX)) ? ADDR_W'(ADDR_MAX) : ADDR_W'(t_scaled);
    end
  end

  always_comb begin
    integrate   = (t < CNT_W'(TAU_EXPERIMENT));
    frame_start = (t == CNT_W'(1));
  end

endmodule
