// tb_aho_compensation: a resonance cancelled by its inverse, both built from
// the IIR filter at its default size (N = 3, B_Y = 32).
//
// The first filter is a harmonic oscillator (HO) standing in for a resonant
// plant: HO(s) = w0^2 / (s^2 + (w0/Q) s + w0^2) with f0 = 1 kHz and Q = 10. The
// second is the compensator, an "anti-harmonic oscillator" (AHO): the inverse
// resonance times a leaky integrator with a roll-off,
//   AHO(s) = K (s^2 + (w0/Q) s + w0^2) / (w0^2 (1 + s/wl) (1 + s/wh)),
// with fl = 30 Hz, fh = 20 kHz and K = f0/fl, so that HO * AHO is close to an
// integrator with unity gain at 1 kHz (constant -90 degree phase) between the
// two corners. f0, Q and the corners are this test's choices. Both filters are
// discretised with the bilinear transform at 100 MHz / 64 and quantised to the
// Q7.24 coefficients. The HO's 12-bit output drives the AHO's input directly,
// as a converter-to-converter chain would.
//
// Checks:
//   * every output of both filters is within 2 LSB of a double-precision run of
//     the quantised difference equation, fed with the samples each filter
//     actually took;
//   * the quantised cascade is within 1.5 dB of the ideal integrator and within
//     15 degrees of -90 degrees at 300 Hz, 1 kHz and 3 kHz;
//   * after settling, the measured gain of the chain at those frequencies is
//     within 3 % + 2 LSB, and its phase within 3 degrees, of the quantised
//     cascade's exact response;
//   * both filters update once every 64 clocks, in step.
module tb_aho_compensation;
  import pld_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int N = 3;
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 100.0e6 / 64.0;
  localparam real K2 = 2.0 * FS;
  localparam real F0 = 1.0e3, QF = 10.0, FL = 30.0, FH = 20.0e3;
  localparam real AMP = 90.0;   // keeps resonance plus switching transients below 2048

  localparam int PERIODS [3] = '{5208, 1562, 521};  // samples per period: 300 Hz, 1 kHz, 3 kHz
  localparam int NPER    [3] = '{2, 4, 10};         // periods measured
  localparam int SETTLE  = 30000;                   // > 3.5 time constants of the 30 Hz pole

  logic               rst;
  logic signed [11:0] u_in, ho_12, aho_12;
  logic signed [31:0] ho_y, aho_y;
  logic               ho_sample, aho_sample, ho_valid, aho_valid;
  coef_wr_t           coef_ho, coef_aho;

  iir_filter u_ho (
    .clk, .rst, .u(u_in), .coef(coef_ho),
    .y_12(ho_12), .y(ho_y), .sample(ho_sample), .y_valid(ho_valid)
  );
  iir_filter u_aho (
    .clk, .rst, .u(ho_12), .coef(coef_aho),
    .y_12(aho_12), .y(aho_y), .sample(aho_sample), .y_valid(aho_valid)
  );

  initial begin
    repeat (64 * (3 * SETTLE + 2 * 5208 + 4 * 1562 + 10 * 521 + 2000)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real    num [2][N+1], den [2][N+1];   // 0 = HO, 1 = AHO
  longint aq [2][N+1], bq [2][N+1];     // quantised, Q7.24
  real    uh [2][N+1];                  // inputs each filter sampled
  real    yr [2][N+1];                  // double-precision reference outputs

  // Multiply polynomial p (degree d) by (c0 + c1 z^-1).
  function automatic void mul1(inout real p [N+1], input int d, input real c0, input real c1);
    for (int i = d + 1; i >= 1; i--) p[i] = p[i] * c0 + p[i-1] * c1;
    p[0] = p[0] * c0;
  endfunction

  // Frequency response of quantised filter f at w (rad/sample): re, im.
  function automatic void resp(input int f, input real w, output real re, output real im);
    real nr, ni, dr, di, dd;
    nr = 0; ni = 0; dr = 0; di = 0;
    for (int i = 0; i <= N; i++) begin
      nr += real'(aq[f][i]) * $cos(w * i); ni -= real'(aq[f][i]) * $sin(w * i);
      dr += real'(bq[f][i]) * $cos(w * i); di -= real'(bq[f][i]) * $sin(w * i);
    end
    dd = dr * dr + di * di;
    re = (nr * dr + ni * di) / dd;
    im = (ni * dr - nr * di) / dd;
  endfunction

  // Cascade HO * AHO, with the one-sample hand-over between the two filters.
  function automatic void cascade(input real w, output real g, output real ph);
    real r0, i0, r1, i1, rr, ii;
    resp(0, w, r0, i0);
    resp(1, w, r1, i1);
    rr = r0 * r1 - i0 * i1;
    ii = r0 * i1 + i0 * r1;
    g  = $sqrt(rr * rr + ii * ii);
    ph = $atan2(ii, rr) - w;
  endfunction

  function automatic real wrap_deg(input real d);
    real r;
    r = d;
    while (r > 180.0) r -= 360.0;
    while (r <= -180.0) r += 360.0;
    return r;
  endfunction

  task automatic write_coef(input int f, input coef_set_e set, input int idx, input longint val);
    coef_wr_t c;
    c = '{we: 1'b1, set: set, idx: 4'(idx), data: 32'(val)};
    @(negedge clk);
    if (f == 0) coef_ho = c; else coef_aho = c;
    @(posedge clk); #1;
    coef_ho.we = 1'b0; coef_aho.we = 1'b0;
  endtask

  function automatic real fac_a(input real w); return 1.0 + K2 / w; endfunction
  function automatic real fac_b(input real w); return 1.0 - K2 / w; endfunction

  initial begin
    real w0, wl, wh, kk, d0, yref, w, s_acc, c_acc, g_meas, p_meas, g_exp, p_exp, f;
    int  freq, k, meas_n, settle_left, outputs, worst, last_valid, cyc, got, diff;
    bit  measuring;
    // ---- design ----
    w0 = 2 * PI * F0; wl = 2 * PI * FL; wh = 2 * PI * FH; kk = F0 / FL;
    for (int fl = 0; fl < 2; fl++)
      for (int i = 0; i <= N; i++) begin num[fl][i] = 0; den[fl][i] = 0; end
    // (s^2 + (w0/Q) s + w0^2) (1 + z^-1)^2 with s = K2 (1 - z^-1) / (1 + z^-1)
    begin
      real c0, c1, c2;
      c0 = K2 * K2 + w0 / QF * K2 + w0 * w0;
      c1 = 2.0 * (w0 * w0 - K2 * K2);
      c2 = K2 * K2 - w0 / QF * K2 + w0 * w0;
      // HO: w0^2 (1 + z^-1)^2 / resonance
      num[0][0] = w0 * w0; num[0][1] = 2 * w0 * w0; num[0][2] = w0 * w0;
      den[0][0] = c0; den[0][1] = c1; den[0][2] = c2;
      // AHO: K resonance / (w0^2 (fac_a(wl) + fac_b(wl) z^-1) (fac_a(wh) + fac_b(wh) z^-1))
      num[1][0] = kk * c0 / (w0 * w0); num[1][1] = kk * c1 / (w0 * w0); num[1][2] = kk * c2 / (w0 * w0);
      den[1][0] = 1.0;
      mul1(den[1], 0, fac_a(wl), fac_b(wl));
      mul1(den[1], 1, fac_a(wh), fac_b(wh));
    end
    for (int fl = 0; fl < 2; fl++) begin
      d0 = den[fl][0];
      for (int i = 0; i <= N; i++) begin
        aq[fl][i] = longint'($rtoi(num[fl][i] / d0 * 16777216.0 + ((num[fl][i] >= 0) ? 0.5 : -0.5)));
        bq[fl][i] = longint'($rtoi(den[fl][i] / d0 * 16777216.0 + ((den[fl][i] >= 0) ? 0.5 : -0.5)));
        check(aq[fl][i] < 64'sd2147483648 && aq[fl][i] >= -64'sd2147483648, "a(i) fits Q7.24");
        check(bq[fl][i] < 64'sd2147483648 && bq[fl][i] >= -64'sd2147483648, "b(i) fits Q7.24");
      end
      bq[fl][0] = 16777216;
      $display("%s: a = %0d %0d %0d %0d, b = 1 %0d %0d %0d (x 2^-24)", (fl == 0) ? "HO " : "AHO",
               aq[fl][0], aq[fl][1], aq[fl][2], aq[fl][3], bq[fl][1], bq[fl][2], bq[fl][3]);
    end
    // ---- the quantised cascade is an integrator ----
    for (int i = 0; i < 3; i++) begin
      f = FS / real'(PERIODS[i]);
      cascade(2 * PI / real'(PERIODS[i]), g_exp, p_exp);
      p_exp = wrap_deg((p_exp + 2 * PI / real'(PERIODS[i])) * 180.0 / PI);
      $display("HO*AHO at %0.0f Hz: gain %0.3f (integrator %0.3f), phase %0.1f deg", f, g_exp, F0 / f, p_exp);
      check(20.0 * $log10(g_exp * f / F0) < 1.5 && 20.0 * $log10(g_exp * f / F0) > -1.5,
            $sformatf("cascade gain at %0.0f Hz", f));
      check(p_exp > -105.0 && p_exp < -75.0, $sformatf("cascade phase at %0.0f Hz", f));
    end
    // ---- load ----
    rst = 1'b1; u_in = '0; coef_ho = '0; coef_aho = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    for (int fl = 0; fl < 2; fl++) begin
      for (int i = 0; i <= N; i++) write_coef(fl, COEF_A, i, aq[fl][i]);
      for (int i = 1; i <= N; i++) write_coef(fl, COEF_B, i, bq[fl][i]);
    end
    // Flush the pass-through state with zero input; the reference starts at zero.
    repeat (64 * 8) @(posedge clk);
    for (int fl = 0; fl < 2; fl++)
      for (int i = 0; i <= N; i++) begin uh[fl][i] = 0; yr[fl][i] = 0; end
    // ---- run ----
    freq = 0; k = 0; outputs = 0; worst = 0; last_valid = -1; cyc = 0;
    settle_left = SETTLE; measuring = 0; s_acc = 0; c_acc = 0; meas_n = 0;
    while (freq < 3) begin
      @(negedge clk);
      w = 2 * PI / real'(PERIODS[freq]);
      u_in = 12'($rtoi(AMP * $sin(w * k) + ((AMP * $sin(w * k)) >= 0 ? 0.5 : -0.5)));
      #1;
      cyc++;
      if (ho_valid || aho_valid || ho_sample || aho_sample)
        check(ho_valid == aho_valid && ho_sample == aho_sample, "filters in step");
      if (ho_valid) begin
        if (last_valid >= 0) check(cyc - last_valid == 64, $sformatf("update period %0d clocks", cyc - last_valid));
        for (int fl = 0; fl < 2; fl++) begin
          yref = 0;
          for (int i = 0; i <= N; i++) yref += real'(aq[fl][i]) / 16777216.0 * uh[fl][i];
          for (int i = 1; i <= N; i++) yref -= real'(bq[fl][i]) / 16777216.0 * yr[fl][i];
          for (int i = N; i > 1; i--) yr[fl][i] = yr[fl][i-1];
          yr[fl][1] = yref;
          got  = (fl == 0) ? int'(ho_12) : int'(aho_12);
          diff = got - $rtoi($floor(yref));
          if (diff < 0) diff = -diff;
          if (diff > worst) worst = diff;
          check(diff <= 2, $sformatf("filter %0d output %0d: %0d, reference %f", fl, outputs, got, yref));
        end
        last_valid = cyc;
        outputs++;
        if (measuring) begin
          // The chain output belongs to input index k-1 (see cascade()).
          s_acc += real'(aho_12) * $sin(w * (k - 1));
          c_acc += real'(aho_12) * $cos(w * (k - 1));
          meas_n++;
          if (meas_n == NPER[freq] * PERIODS[freq]) begin
            f = FS / real'(PERIODS[freq]);
            g_meas = 2.0 / meas_n * $sqrt(s_acc * s_acc + c_acc * c_acc) / AMP;
            p_meas = $atan2(c_acc, s_acc) * 180.0 / PI;
            cascade(w, g_exp, p_exp);
            p_exp = wrap_deg(p_exp * 180.0 / PI);
            $display("chain at %0.0f Hz: measured gain %0.3f phase %0.1f deg, expected %0.3f, %0.1f deg",
                     f, g_meas, p_meas, g_exp, p_exp);
            check(g_meas * AMP > g_exp * AMP * 0.97 - 2.0 && g_meas * AMP < g_exp * AMP * 1.03 + 2.0,
                  $sformatf("chain gain at %0.0f Hz", f));
            check(wrap_deg(p_meas - p_exp) < 3.0 && wrap_deg(p_meas - p_exp) > -3.0,
                  $sformatf("chain phase at %0.0f Hz", f));
            freq++; measuring = 0; settle_left = SETTLE; s_acc = 0; c_acc = 0; meas_n = 0;
          end
        end else if (settle_left > 0) begin
          settle_left--;
          if (settle_left == 0) measuring = 1;
        end
      end
      if (ho_sample) begin
        for (int fl = 0; fl < 2; fl++)
          for (int i = N; i > 0; i--) uh[fl][i] = uh[fl][i-1];
        uh[0][0] = real'(u_in);
        uh[1][0] = real'(ho_12);
        k++;
      end
    end
    $display("largest output difference from the double-precision reference: %0d LSB", worst);
    check(outputs > 3 * SETTLE, "outputs observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
