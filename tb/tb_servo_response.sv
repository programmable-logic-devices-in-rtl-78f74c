// tb_servo_response: the cavity-lock servo arms run with filters designed from
// the reference experiment's plant.
//
// Fast arm: T_U = T_LP1 T_LP2^2 / (T_C T_V) with T_C a 10 kHz low-pass (the
// cavity), T_V a 100 kHz low-pass (VCO-AOM), T_LP1 a 100 Hz and T_LP2 a 300 kHz
// low-pass: a third-order filter with unity DC gain. Slow arm: T_L a 3 Hz
// one-pole low-pass. Both are discretised here with the bilinear transform at
// the filters' update rate, 100 MHz / 64, and quantised to the filters' Q7.24
// coefficients. Each first-order factor (1 + s/w) becomes
// ((1 + k/w) + (1 - k/w) z^-1) / (1 + z^-1) with k = 2 f_s.
//
// The error input is a 2000-LSB sine stepped through 200 Hz, 1 kHz and 10 kHz.
// Checks: every output of both arms is within 2 LSB of a double-precision run
// of the same quantised difference equation, and after settling the measured
// T_U gain at each frequency (correlation over whole periods) matches the
// quantised filter's exact response |H(e^jwT)| within 2 % + 1.5 LSB. It also
// prints the deviation of the quantised design from the continuous one.
module tb_servo_response;
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
  localparam real AMP = 2000.0;

  logic               rst, coef_sel, upper_valid, lower_valid;
  logic signed [11:0] err, aom_out, pzt_out;
  coef_wr_t           coef;

  cavity_lock dut (.clk, .rst, .err, .coef, .coef_sel, .aom_out, .pzt_out, .upper_valid, .lower_valid);

  localparam int PERIODS [3] = '{7812, 1560, 156};   // samples per sine period
  localparam int SETTLE = 18000;                      // > 7 time constants of 100 Hz

  initial begin
    repeat (64 * (3 * SETTLE + 7812 + 3 * 1560 + 20 * 156 + 2000)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real    num [2][N+1], den [2][N+1];   // real designs, normalised den[0] = 1
  longint aq [2][N+1], bq [2][N+1];     // quantised, Q7.24
  real    uh [N+1];
  real    yr [2][N+1];                  // double-precision reference outputs

  // Multiply polynomial p (degree d) by (c0 + c1 z^-1).
  function automatic void mul1(inout real p [N+1], input int d, input real c0, input real c1);
    for (int i = d + 1; i >= 1; i--) p[i] = p[i] * c0 + p[i-1] * c1;
    p[0] = p[0] * c0;
  endfunction

  function automatic real mag(input int arm, input real w);
    real nr, ni, dr, di;
    nr = 0; ni = 0; dr = 0; di = 0;
    for (int i = 0; i <= N; i++) begin
      nr += real'(aq[arm][i]) * $cos(w * i); ni -= real'(aq[arm][i]) * $sin(w * i);
      dr += real'(bq[arm][i]) * $cos(w * i); di -= real'(bq[arm][i]) * $sin(w * i);
    end
    return $sqrt((nr * nr + ni * ni) / (dr * dr + di * di));
  endfunction

  // Continuous design magnitude of T_U at frequency f.
  function automatic real tu_cont(input real f);
    real r;
    r = $sqrt(1.0 + (f / 10.0e3) ** 2) * $sqrt(1.0 + (f / 100.0e3) ** 2)
      / ($sqrt(1.0 + (f / 100.0) ** 2) * (1.0 + (f / 300.0e3) ** 2));
    return r;
  endfunction

  task automatic write_coef(input bit sel, input coef_set_e set, input int idx, input longint val);
    @(negedge clk);
    coef_sel = sel;
    coef = '{we: 1'b1, set: set, idx: 4'(idx), data: 32'(val)};
    @(posedge clk); #1;
    coef.we = 1'b0;
  endtask

  function automatic real fac_a(input real w); return 1.0 + K2 / w; endfunction
  function automatic real fac_b(input real w); return 1.0 - K2 / w; endfunction

  initial begin
    real wc, wv, w1, w2, wl, d0, yref, w, s_acc, c_acc, amp_meas, amp_exp;
    int  freq, k, n_in_period, meas_n, settle_left, outputs, worst;
    bit  measuring;
    // ---- design ----
    wc = 2 * PI * 10.0e3; wv = 2 * PI * 100.0e3; w1 = 2 * PI * 100.0; w2 = 2 * PI * 300.0e3;
    wl = 2 * PI * 3.0;
    for (int arm = 0; arm < 2; arm++)
      for (int i = 0; i <= N; i++) begin num[arm][i] = 0; den[arm][i] = 0; end
    num[0][0] = 1.0; den[0][0] = 1.0;
    mul1(num[0], 0, fac_a(wc), fac_b(wc));
    mul1(num[0], 1, fac_a(wv), fac_b(wv));
    mul1(num[0], 2, 1.0, 1.0);
    mul1(den[0], 0, fac_a(w1), fac_b(w1));
    mul1(den[0], 1, fac_a(w2), fac_b(w2));
    mul1(den[0], 2, fac_a(w2), fac_b(w2));
    num[1][0] = 1.0; den[1][0] = 1.0;
    mul1(num[1], 0, 1.0, 1.0);
    mul1(den[1], 0, fac_a(wl), fac_b(wl));
    for (int arm = 0; arm < 2; arm++) begin
      d0 = den[arm][0];
      for (int i = 0; i <= N; i++) begin
        aq[arm][i] = longint'($rtoi(num[arm][i] / d0 * 16777216.0 + ((num[arm][i] >= 0) ? 0.5 : -0.5)));
        bq[arm][i] = longint'($rtoi(den[arm][i] / d0 * 16777216.0 + ((den[arm][i] >= 0) ? 0.5 : -0.5)));
      end
      bq[arm][0] = 16777216;
      $display("arm %0d: a = %0d %0d %0d %0d, b = 1 %0d %0d %0d (x 2^-24)", arm,
               aq[arm][0], aq[arm][1], aq[arm][2], aq[arm][3], bq[arm][1], bq[arm][2], bq[arm][3]);
    end
    // ---- load ----
    rst = 1'b1; err = '0; coef = '0; coef_sel = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    for (int arm = 0; arm < 2; arm++) begin
      for (int i = 0; i <= N; i++) write_coef(arm[0], COEF_A, i, aq[arm][i]);
      for (int i = 1; i <= N; i++) write_coef(arm[0], COEF_B, i, bq[arm][i]);
    end
    // Let the pass-through state flush with zero input: the filters' delay
    // lines hold zeros, and the reference starts from zero too.
    for (int i = 0; i <= N; i++) begin uh[i] = 0; yr[0][i] = 0; yr[1][i] = 0; end
    repeat (64 * 8) @(posedge clk);
    // ---- run ----
    freq = 0; k = 0; outputs = 0; worst = 0;
    settle_left = SETTLE; measuring = 0; s_acc = 0; c_acc = 0; meas_n = 0;
    while (freq < 3) begin
      @(negedge clk);
      w = 2 * PI / real'(PERIODS[freq]);
      err = 12'($rtoi(AMP * $sin(w * k) + ((AMP * $sin(w * k)) >= 0 ? 0.5 : -0.5)));
      #1;
      if (upper_valid) begin
        for (int arm = 0; arm < 2; arm++) begin
          yref = 0;
          for (int i = 0; i <= N; i++) yref += real'(aq[arm][i]) / 16777216.0 * uh[i];
          for (int i = 1; i <= N; i++) yref -= real'(bq[arm][i]) / 16777216.0 * yr[arm][i];
          for (int i = N; i > 1; i--) yr[arm][i] = yr[arm][i-1];
          yr[arm][1] = yref;
          begin
            int got, diff;
            got = (arm == 0) ? int'(aom_out) : int'(pzt_out);
            diff = got - $rtoi($floor(yref));
            if (diff < 0) diff = -diff;
            if (diff > worst) worst = diff;
            check(diff <= 2, $sformatf("arm %0d output %0d: %0d, reference %f", arm, outputs, got, yref));
          end
        end
        outputs++;
        if (measuring) begin
          // y(n) belongs to input index k-1 (the sample taken 64 clocks ago).
          s_acc += real'(aom_out) * $sin(w * (k - 1));
          c_acc += real'(aom_out) * $cos(w * (k - 1));
          meas_n++;
          if (meas_n == ((freq == 2) ? 20 * PERIODS[freq] : (freq == 1 ? 3 * PERIODS[freq] : PERIODS[freq]))) begin
            amp_meas = 2.0 / meas_n * $sqrt(s_acc * s_acc + c_acc * c_acc);
            amp_exp  = AMP * mag(0, w);
            $display("T_U at %0.0f Hz: measured %0.2f, quantised filter %0.2f, continuous design %0.2f LSB",
                     FS / PERIODS[freq], amp_meas, amp_exp, AMP * tu_cont(FS / PERIODS[freq]));
            check(amp_meas > amp_exp * 0.98 - 1.5 && amp_meas < amp_exp * 1.02 + 1.5,
                  $sformatf("T_U gain at %0.0f Hz", FS / PERIODS[freq]));
            freq++; measuring = 0; settle_left = SETTLE; s_acc = 0; c_acc = 0; meas_n = 0;
          end
        end else if (settle_left > 0) begin
          settle_left--;
          if (settle_left == 0) measuring = 1;
        end
      end
      if (dut.u_t_upper.sample) begin
        for (int i = N; i > 0; i--) uh[i] = uh[i-1];
        uh[0] = real'(err);
        k++;
      end
    end
    $display("largest output difference from the double-precision reference: %0d LSB", worst);
    check(outputs > 3 * SETTLE, "outputs observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
