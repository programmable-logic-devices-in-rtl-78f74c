// tb_iir_filter: self-checking test of the IIR filter (N = 3, B_Y = 32).
//
// Each output y(n) is compared with the difference equation evaluated here at
// full precision from the recorded input samples and the filter's own previous
// outputs, with the same trims: au = (sum a(i) u(n-i)) >>> 4, by = (sum b(i)
// y(n-i)) >>> 24, y = au - by, each wrapped to 32 bits, y_12 = y[31:20]. It
// checks the sample period, exactly 2*B_Y = 64 clocks (f_C/(2 B_Y)), the reset
// coefficients (a pass-through), a one-pole low-pass whose step response must
// settle at the input level, and random coefficient sets. The two outputs after
// each coefficient change are not compared, since the change lands in the middle
// of a computation. Between updates y and y_12 must hold their value.
module tb_iir_filter;
  import pld_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int N = 3, BY = 32, PERIOD = 2 * BY;

  logic               rst;
  logic signed [11:0] u, y_12;
  logic signed [31:0] y;
  logic               sample, y_valid;
  coef_wr_t           coef;

  iir_filter #(.N(N), .BY(BY)) dut (.clk, .rst, .u, .coef, .y_12, .y, .sample, .y_valid);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [127:0] wide_t;
  longint a [N+1];
  longint b [N+1];
  longint uh [N+1];    // uh[i] = u(n-i)
  longint yh [N+1];    // yh[i] = y(n-i), yh[0] unused
  int     skip, outputs, cyc, last_valid, last_sample, periods;
  bit     step_mode;
  logic signed [11:0] step_level;

  function automatic longint wrap32(input wide_t v);
    return longint'($signed(v[31:0]));
  endfunction

  task automatic write_coef(input coef_set_e set, input int idx, input longint val);
    @(negedge clk);
    coef = '{we: 1'b1, set: set, idx: 4'(idx), data: 32'(val)};
    if (set == COEF_A) a[idx] = longint'($signed(32'(val)));
    else               b[idx] = longint'($signed(32'(val)));
    @(posedge clk); #1;
    coef.we = 1'b0;
    skip = 2;
  endtask

  // Cycle monitor: drives u, checks timing and outputs.
  initial begin
    wide_t sa, sb;
    longint au, by, expect_y;
    logic signed [31:0] y_prev;
    cyc = 0; last_valid = -1; last_sample = -1; periods = 0; outputs = 0;
    forever begin
      @(negedge clk);
      if (!rst) begin
        if (step_mode) u = step_level;
        else           u = (cyc % 9 == 0) ? -12'sd2048 : 12'($urandom);
        #1;
        if (!y_valid && outputs > 0)
          check(y == y_prev && y_12 == y_prev[31:20], $sformatf("output held between updates, cycle %0d", cyc));
        y_prev = y;
        if (y_valid) begin
          sa = 0; sb = 0;
          for (int i = 0; i <= N; i++) sa += wide_t'(a[i]) * wide_t'(uh[i]);
          for (int i = 1; i <= N; i++) sb += wide_t'(b[i]) * wide_t'(yh[i]);
          au = wrap32(sa >>> 4);
          by = wrap32(sb >>> 24);
          expect_y = wrap32(wide_t'(au - by));
          if (skip > 0) skip--;
          else begin
            check(longint'(y) == expect_y, $sformatf("output %0d: y=%0d expected %0d", outputs, y, expect_y));
            check(y_12 == y[31:20], "y_12 is the top 12 bits of y");
          end
          check(cyc - last_sample == PERIOD, $sformatf("latency %0d", cyc - last_sample));
          if (last_valid >= 0) begin
            check(cyc - last_valid == PERIOD, $sformatf("output period %0d", cyc - last_valid));
            periods++;
          end
          last_valid = cyc;
          outputs++;
          for (int i = N; i > 1; i--) yh[i] = yh[i-1];
          yh[1] = longint'(y);
        end
        if (sample) begin
          if (last_sample >= 0) check(cyc - last_sample == PERIOD, "sample period");
          last_sample = cyc;
          for (int i = N; i > 0; i--) uh[i] = uh[i-1];
          uh[0] = longint'(u);
        end
        cyc++;
      end
    end
  end

  initial begin
    rst = 1'b1; u = '0; coef = '0; skip = 0; step_mode = 1'b0; step_level = '0;
    for (int i = 0; i <= N; i++) begin a[i] = 0; b[i] = 0; uh[i] = 0; yh[i] = 0; end
    a[0] = 64'd1 << 24;                       // reset value: pass-through
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    // Pass-through: 50 outputs.
    wait (outputs >= 50);
    check(y_12 == 12'(uh[1]), "pass-through: y_12 equals the input sample");
    // One-pole low-pass y(n) = y(n-1)/... : a0 = 1/16, b1 = -15/16 (DC gain 1).
    write_coef(COEF_A, 0, 64'd1 << 20);
    write_coef(COEF_B, 1, -(64'd15 << 20));
    step_level = 12'sd1000; step_mode = 1'b1;
    wait (outputs >= 400);
    check(y_12 >= 12'sd998 && y_12 <= 12'sd1000, $sformatf("low-pass settles at the step: %0d", y_12));
    step_mode = 1'b0;
    // Random coefficient sets, small and full range.
    for (int set = 0; set < 20; set++) begin
      for (int i = 0; i <= N; i++)
        write_coef(COEF_A, i, (set % 2) ? longint'($signed(32'($urandom))) : longint'($urandom_range(0, 1 << 24)) - (1 << 23));
      for (int i = 1; i <= N; i++)
        write_coef(COEF_B, i, (set % 2) ? longint'($signed(32'($urandom))) : longint'($urandom_range(0, 1 << 22)) - (1 << 21));
      wait (outputs >= 420 + 30 * (set + 1));
    end
    check(periods > 900, "outputs observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
