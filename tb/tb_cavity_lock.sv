// tb_cavity_lock: self-checking test of the two-arm cavity lock servo.
//
// Loads different coefficients into the two arms through the shared port
// (coef_sel 0 = T_upper to the VCO-AOM, 1 = T_lower to the PZT): T_upper a
// lead-lag-like third-order set, T_lower a slow one-pole low-pass. Both arms
// see the same random error signal; each output is compared with the
// difference equation evaluated here, both must update together every 64
// clocks, and a write to one arm must leave the other unchanged.
module tb_cavity_lock;
  import pld_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int N = 3, PERIOD = 64;

  logic               rst, coef_sel, upper_valid, lower_valid;
  logic signed [11:0] err, aom_out, pzt_out;
  coef_wr_t           coef;

  cavity_lock dut (.clk, .rst, .err, .coef, .coef_sel, .aom_out, .pzt_out, .upper_valid, .lower_valid);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic signed [127:0] wide_t;
  longint a [2][N+1];
  longint b [2][N+1];
  longint uh [N+1];
  longint yh [2][N+1];
  int     skip [2];
  int     outputs, cyc, last_valid;

  function automatic longint wrap32(input wide_t v);
    return longint'($signed(v[31:0]));
  endfunction

  // One step of the difference equation with the filters' trims.
  function automatic longint step(input int arm);
    wide_t sa, sb;
    sa = 0; sb = 0;
    for (int i = 0; i <= N; i++) sa += wide_t'(a[arm][i]) * wide_t'(uh[i]);
    for (int i = 1; i <= N; i++) sb += wide_t'(b[arm][i]) * wide_t'(yh[arm][i]);
    return wrap32(wide_t'(wrap32(sa >>> 4) - wrap32(sb >>> 24)));
  endfunction

  task automatic write_coef(input bit sel, input coef_set_e set, input int idx, input longint val);
    @(negedge clk);
    coef_sel = sel;
    coef = '{we: 1'b1, set: set, idx: 4'(idx), data: 32'(val)};
    if (set == COEF_A) a[sel][idx] = val; else b[sel][idx] = val;
    @(posedge clk); #1;
    coef.we = 1'b0;
    skip[sel] = 2;   // a write lands in the middle of a computation
  endtask

  // Cycle monitor. The model's y history is taken from the arms' internal
  // 32-bit y after each output, so every output is a one-step prediction.
  initial begin
    longint yn [2];
    logic signed [31:0] yint [2];
    cyc = 0; last_valid = -1; outputs = 0;
    forever begin
      @(negedge clk);
      if (!rst) begin
        err = 12'($urandom_range(0, 1600)) - 12'sd800;
        #1;
        check(upper_valid == lower_valid, "arms update together");
        yint[0] = dut.u_t_upper.y;
        yint[1] = dut.u_t_lower.y;
        if (upper_valid) begin
          for (int arm = 0; arm < 2; arm++) begin
            yn[arm] = step(arm);
            for (int i = N; i > 1; i--) yh[arm][i] = yh[arm][i-1];
            yh[arm][1] = longint'(yint[arm]);
          end
          if (skip[0] > 0) skip[0]--;
          else check(aom_out == 12'(yn[0] >>> 20),
                     $sformatf("T_upper output %0d: %0d vs %0d", outputs, aom_out, yn[0] >>> 20));
          if (skip[1] > 0) skip[1]--;
          else check(pzt_out == 12'(yn[1] >>> 20),
                     $sformatf("T_lower output %0d: %0d vs %0d", outputs, pzt_out, yn[1] >>> 20));
          if (last_valid >= 0) check(cyc - last_valid == PERIOD, "update period");
          last_valid = cyc;
          outputs++;
        end
        // The first cycle after reset and every output cycle sample the input.
        if (outputs > 0) check(dut.u_t_upper.sample == upper_valid, "sampling in the output cycle");
        if (dut.u_t_upper.sample) begin
          for (int i = N; i > 0; i--) uh[i] = uh[i-1];
          uh[0] = longint'(err);
        end
        cyc++;
      end
    end
  end

  initial begin
    rst = 1'b1; err = '0; coef = '0; coef_sel = 1'b0; skip[0] = 0; skip[1] = 0;
    foreach (a[k, i]) begin a[k][i] = 0; b[k][i] = 0; yh[k][i] = 0; end
    foreach (uh[i]) uh[i] = 0;
    a[0][0] = 64'd1 << 24; a[1][0] = 64'd1 << 24;   // reset: pass-through
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    wait (outputs >= 20);
    // T_upper: third-order set; T_lower: one-pole low-pass, DC gain 1.
    write_coef(1'b0, COEF_A, 0,  64'sd12582912);   //  0.75
    write_coef(1'b0, COEF_A, 1, -64'sd8388608);    // -0.5
    write_coef(1'b0, COEF_A, 2,  64'sd2097152);    //  0.125
    write_coef(1'b0, COEF_B, 1, -64'sd10066330);   // -0.6
    write_coef(1'b0, COEF_B, 2,  64'sd1677722);    //  0.1
    write_coef(1'b1, COEF_A, 0,  64'sd262144);     //  1/64
    write_coef(1'b1, COEF_B, 1, -64'sd16515072);   // -63/64
    wait (outputs >= 200);
    // Rewrite T_lower only; T_upper is still checked on every output.
    wait (upper_valid); @(negedge clk);
    write_coef(1'b1, COEF_A, 0, 64'sd524288);      //  1/32
    write_coef(1'b1, COEF_B, 1, -64'sd16252928);   // -31/32
    wait (outputs >= 400);
    check(outputs >= 400, "outputs observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
