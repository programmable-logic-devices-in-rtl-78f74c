// tb_gva_controller_top: end-to-end test of the FPGA controller at its default
// sizes (100 MHz clock, 12-bit converters, B_Y = 32, 5000-cycle pulses with
// 1000 dead cycles).
//
// Three simple plants close the loops around the chip, one clock per step:
//  * cavity lock: the error signal is err = D - dac_aom, a detuning D that the
//    fast arm must cancel. T_upper is loaded as an integrator (a0 = 1/8,
//    b1 = -1) and T_lower as a slow low-pass (a0 = 1/64, b1 = -63/64). The
//    error must fall to within 1 LSB after each of two steps of D.
//  * adaptive phase: the homodyne current is I = 32*(phi_true - dac_lo_phase),
//    so the integrator must drive the output to phi_true by the end of each
//    pulse, and hold 0 in the dead time.
//  * identity channel: dac_aux must equal adc_aux 4 clocks earlier, the delay
//    of the FPGA buffers.
// It counts each mechanism (coefficient writes to each arm, lock updates every
// 64 clocks, pulses, dead-time zeroing, phase lock, cavity lock and re-lock,
// identity delay) and counts a failure for any that never happened.
module tb_gva_controller_top;
  import pld_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic               rst, coef_sel, lock_update, pulse_active;
  logic signed [11:0] adc_err, adc_homodyne, adc_aux;
  logic signed [11:0] dac_aom, dac_pzt, dac_lo_phase, dac_aux;
  coef_wr_t           coef;

  gva_controller_top dut (
    .clk, .rst, .adc_err, .adc_homodyne, .adc_aux, .coef, .coef_sel,
    .dac_aom, .dac_pzt, .dac_lo_phase, .dac_aux, .lock_update, .pulse_active
  );

  localparam int CYCLES = 40000;

  initial begin
    repeat (CYCLES + 2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_coef_upper, n_coef_lower, n_updates, n_pulses, n_dead_zero, n_phase_lock;
  int n_cavity_lock, n_identity;

  task automatic write_coef(input bit sel, input coef_set_e set, input int idx, input int val);
    @(negedge clk);
    coef_sel = sel;
    coef = '{we: 1'b1, set: set, idx: 4'(idx), data: 32'(val)};
    @(negedge clk);
    coef.we = 1'b0;
    if (sel) n_coef_lower++; else n_coef_upper++;
  endtask

  int detuning, phi_true;
  logic signed [11:0] aux_hist [5];

  function automatic logic signed [11:0] clip12(input int v);
    return (v > 2047) ? 12'sd2047 : (v < -2048) ? -12'sd2048 : 12'(v);
  endfunction

  initial begin
    int last_update, c, err_v, pulse_t;
    bit was_active;
    rst = 1'b1; coef = '0; coef_sel = 1'b0;
    adc_err = '0; adc_homodyne = '0; adc_aux = '0;
    n_coef_upper = 0; n_coef_lower = 0; n_updates = 0; n_pulses = 0;
    n_dead_zero = 0; n_phase_lock = 0; n_cavity_lock = 0; n_identity = 0;
    foreach (aux_hist[i]) aux_hist[i] = '0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    // Load both arms of the cavity lock.
    write_coef(1'b0, COEF_A, 0, 1 << 21);      // T_upper: a0 = 1/8
    write_coef(1'b0, COEF_B, 1, -(1 << 24));   //          b1 = -1 (integrator)
    write_coef(1'b1, COEF_A, 0, 1 << 18);      // T_lower: a0 = 1/64
    write_coef(1'b1, COEF_B, 1, -63 * (1 << 18)); //       b1 = -63/64
    detuning = 700; phi_true = 150;
    last_update = -1; was_active = 1'b0; pulse_t = 0;
    for (c = 0; c < CYCLES; c++) begin
      @(negedge clk);
      if (c == 20000) detuning = -450;
      if (c == 18000) phi_true = -220;
      // Plants, evaluated on the DAC codes of this cycle.
      err_v = detuning - int'(dac_aom);
      adc_err = clip12(err_v);
      adc_homodyne = clip12(32 * (phi_true - int'(dac_lo_phase)));
      adc_aux = 12'($urandom);
      #1;
      // Identity channel: 4 cycles of buffer delay.
      for (int i = 4; i > 0; i--) aux_hist[i] = aux_hist[i-1];
      aux_hist[0] = adc_aux;
      if (c >= 4) begin
        check(dac_aux == aux_hist[4], $sformatf("identity delay at cycle %0d", c));
        n_identity++;
      end
      // Lock updates every 2*B_Y = 64 cycles.
      if (lock_update) begin
        if (last_update >= 0) check(c - last_update == 64, $sformatf("update period %0d", c - last_update));
        last_update = c;
        n_updates++;
      end
      // Cavity lock reached before each step of the detuning.
      if (c == 19999 || c == CYCLES - 1) begin
        check(err_v >= -1 && err_v <= 1, $sformatf("cavity error %0d at cycle %0d", err_v, c));
        check(dac_pzt >= -12'sd3 && dac_pzt <= 12'sd3, $sformatf("PZT arm %0d", dac_pzt));
        n_cavity_lock++;
      end
      // Adaptive phase: pulses, lock at the end of each pulse, zero in dead time.
      if (pulse_active && !was_active) begin n_pulses++; pulse_t = 0; end
      if (pulse_active) pulse_t++;
      if (!pulse_active && was_active) begin
        // Output path lags the pulse by the output buffers; look at the phase
        // a few cycles into the dead time, after the end-of-pulse value passed.
        check(dac_lo_phase >= 12'(phi_true - 4) && dac_lo_phase <= 12'(phi_true + 4),
              $sformatf("phase at end of pulse %0d, true %0d", dac_lo_phase, phi_true));
        n_phase_lock++;
      end
      if (!pulse_active && was_active == 1'b0 && c > 5100 && dac_lo_phase == '0) n_dead_zero++;
      was_active = pulse_active;
    end
    check(n_coef_upper > 0, "coefficient writes to T_upper");
    check(n_coef_lower > 0, "coefficient writes to T_lower");
    check(n_updates > 600, "lock updates");
    check(n_pulses >= 6, "pulses");
    check(n_dead_zero > 0, "output zero in dead time");
    check(n_phase_lock >= 6, "phase locks");
    check(n_cavity_lock == 2, "cavity lock and re-lock");
    check(n_identity > 0, "identity channel");
    $display("mechanisms: coef_upper=%0d coef_lower=%0d updates=%0d pulses=%0d dead_zero=%0d phase_lock=%0d cavity_lock=%0d identity=%0d",
             n_coef_upper, n_coef_lower, n_updates, n_pulses, n_dead_zero, n_phase_lock, n_cavity_lock, n_identity);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
