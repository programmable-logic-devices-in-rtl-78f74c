// tb_adaptive_phase: self-checking test of the gain-scheduled phase integrator.
//
// A short-frame instance (TAU_EXPERIMENT = 60, TAU_DEAD = 12, TIME_SHIFT = 2)
// is driven with random photocurrent and compared cycle by cycle with a model
// built from the datapath description: gain table G(a) = 65535/sqrt(a+1)
// (computed here in floating point), one cycle for the table, one for the
// multiplier, dphi = product[27:16], Phi(t) = Phi(t-1) + dphi(t) inside the
// pulse, restart from zero at each pulse, output Phi[20:9] inside the pulse
// and 0 outside. A second phase closes a crude loop, I = 256*(100 - Phi),
// and checks that the output settles near the target by the end of each pulse.
module tb_adaptive_phase;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int TAU = 60, DEAD = 12, SHIFT = 2, FRAME = TAU + DEAD;

  logic               rst;
  logic signed [11:0] i_cur, phi_out;
  logic               integ, fs;

  adaptive_phase #(.TAU_EXPERIMENT(TAU), .TAU_DEAD(DEAD), .TIME_SHIFT(SHIFT)) dut (
    .clk, .rst, .i_cur, .phi_out, .integrate(integ), .frame_start(fs)
  );

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint gain(input int a);
    real g;
    g = 65535.0 / $sqrt(real'(a + 1));
    return (g > 65535.0) ? 65535 : longint'($rtoi(g + 0.5));
  endfunction

  // Model state (values of the previous cycle).
  int     tm;
  longint g_prev, p_prev, acc_prev, addr_prev, i_prev;
  bit     closed_prev, known;
  int     pulses, dead_zero;

  initial begin
    longint g_now, p_now, dphi_prev, acc_now, out_now;
    int     err, locked;
    int     addr_now;
    bit     closed_now;
    rst = 1'b1; i_cur = '0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    // After reset: t = FRAME, address = sat(FRAME >> SHIFT), pipeline flushed
    // with zero current and the table word at that address.
    tm = FRAME; addr_prev = FRAME >> SHIFT; i_prev = 0;
    g_prev = gain(FRAME >> SHIFT); p_prev = 0; acc_prev = 0;
    closed_prev = 0; known = 0; pulses = 0; dead_zero = 0; locked = 0;
    for (int c = 0; c < 30 * FRAME; c++) begin
      // Drive this cycle's current (random, full scale some of the time).
      if (c < 24 * FRAME) i_cur = (c % 7 == 0) ? -12'sd2048 : 12'($urandom);
      else begin
        // Closed loop: the "photocurrent" is proportional to the phase error.
        err = 256 * (100 - int'(phi_out));
        i_cur = (err > 2047) ? 12'sd2047 : (err < -2048) ? -12'sd2048 : 12'(err);
        if (tm == TAU - 1) begin
          check(phi_out > 12'sd92 && phi_out < 12'sd108,
                $sformatf("locked phase at end of pulse: %0d", phi_out));
          locked++;
        end
      end
      #1;
      addr_now   = ((tm >> SHIFT) > 255) ? 255 : (tm >> SHIFT);
      closed_now = (tm < TAU) && (tm != 1);
      g_now      = gain(int'(addr_prev));
      dphi_prev  = p_prev >>> 16;
      acc_now    = dphi_prev + (closed_prev ? acc_prev : 0);
      acc_now    = longint'(21'(acc_now));
      if (acc_now >= 1048576) acc_now -= 2097152;
      out_now    = closed_prev ? (acc_prev >>> 9) : 0;
      if (known) check(longint'(phi_out) == out_now,
                       $sformatf("cycle %0d (t=%0d): phi_out %0d, model %0d", c, tm, phi_out, out_now));
      check(integ == (tm < TAU) && fs == (tm == 1), $sformatf("cycle %0d: sequencer", c));
      if (!closed_prev && c > 3) known = 1;
      if (fs) pulses++;
      if (tm >= TAU && tm > 2 && known) begin
        if (phi_out == 0) dead_zero++;
      end
      // Advance the model by one clock.
      p_now     = i_prev * g_prev;       // product register for this cycle
      p_prev    = p_now;
      i_prev    = longint'(i_cur);
      g_prev    = g_now;
      acc_prev  = acc_now;
      addr_prev = addr_now;
      closed_prev = closed_now;
      tm = (tm == FRAME) ? 1 : tm + 1;
      @(posedge clk);
      @(negedge clk);
    end
    check(pulses >= 29, "pulses seen");
    check(locked >= 5, "closed-loop pulses checked");
    check(dead_zero > 0, "output held at zero between pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
