// tb_fir_serial: self-checking test of the bit-serial FIR filter.
//
// Four taps, 12-bit input, 32-bit coefficients. Checks the reset coefficients
// (COEF_INIT), then random coefficients written through the port, random
// inputs including full-scale negative ones, back-to-back samples (one output
// every X_W = 12 clocks, the f_C/B_U rate) and samples separated by idle gaps.
// Each output is compared with sum c(i) x(n-i) computed here, and `valid` must
// come exactly X_W cycles after `start`.
module tb_fir_serial;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int NT = 4, XW = 12, CW = 32, AW = XW + CW + 2;
  localparam logic [NT-1:0][CW-1:0] INIT = {32'sd4, -32'sd3, 32'sd2, 32'sd1};

  logic                 rst, start, coef_we, valid, busy;
  logic signed [XW-1:0] x_in;
  logic [1:0]           coef_idx;
  logic signed [CW-1:0] coef_data;
  logic signed [AW-1:0] y;

  fir_serial #(.NTAPS(NT), .X_W(XW), .COEF_W(CW), .COEF_INIT(INIT)) dut (
    .clk, .rst, .start, .x_in, .coef_we, .coef_idx, .coef_data, .y, .valid, .busy
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint c [NT];
  longint hist [NT];
  int     samples;

  task automatic run_sample(input logic signed [XW-1:0] x, input int gap);
    longint expect_y;
    int lat;
    repeat (gap) @(negedge clk);
    for (int i = NT - 1; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = longint'(x);
    expect_y = 0;
    for (int i = 0; i < NT; i++) expect_y += c[i] * hist[i];
    start = 1'b1; x_in = x;
    @(posedge clk); #1;
    start = 1'b0;
    lat = 1;
    while (!valid && lat < 100) begin @(posedge clk); #1; lat++; end
    check(lat == XW, $sformatf("latency %0d, expected %0d", lat, XW));
    check(longint'(y) == expect_y, $sformatf("sample %0d: y=%0d, expected %0d", samples, y, expect_y));
    samples++;
    // Back-to-back: the next start may be given in this valid cycle.
    @(negedge clk);
    check(!busy, "not busy in the valid cycle");
  endtask

  initial begin
    rst = 1'b1; start = 1'b0; coef_we = 1'b0; coef_idx = '0; coef_data = '0; x_in = '0;
    samples = 0;
    for (int i = 0; i < NT; i++) begin c[i] = longint'($signed(INIT[i])); hist[i] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    // Reset coefficients.
    for (int n = 0; n < 10; n++) run_sample(12'($urandom), 0);
    // Random coefficients, full range.
    for (int round = 0; round < 30; round++) begin
      for (int i = 0; i < NT; i++) begin
        @(negedge clk);
        coef_we = 1'b1; coef_idx = 2'(i); coef_data = 32'($urandom);
        if (round % 3 == 0) coef_data = (i % 2) ? 32'sh8000_0000 : 32'sh7fff_ffff;
        c[i] = longint'(coef_data);
        @(posedge clk); #1; coef_we = 1'b0;
      end
      for (int n = 0; n < 20; n++) begin
        logic signed [XW-1:0] x;
        x = (n % 5 == 0) ? -12'sd2048 : 12'($urandom);
        // Back-to-back: start in the cycle right after valid.
        run_sample(x, (n % 4 == 3) ? int'($urandom_range(1, 5)) : 0);
      end
    end
    check(samples == 610, "sample count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
