// tb_ramblock: self-checking test of the block-RAM look-up table.
//
// Loads the 256 x 16 gain table, checks every entry against 65535/sqrt(a+1)
// computed here in floating point, checks that a read takes exactly one clock,
// writes random words at run time and reads them back (including read-first
// behaviour on a simultaneous write), and checks the synchronous output reset
// and the EN hold.
module tb_ramblock;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        en, we, rst;
  logic [7:0]  addr;
  logic [15:0] di, dout;
  logic [15:0] model [256];

  ramblock #(.ADDR_W(8), .DATA_W(16), .INIT_FILE("rtl/gain_lut.hex")) dut (
    .clk, .en, .we, .rst, .addr, .di, .dout
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] gain(input int a);
    real g;
    g = 65535.0 / $sqrt(real'(a + 1));
    return (g > 65535.0) ? 16'hffff : 16'($rtoi(g + 0.5));
  endfunction

  initial begin
    en = 1'b1; we = 1'b0; rst = 1'b0; addr = '0; di = '0;
    // Preloaded table, one-cycle read latency.
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); addr = 8'(a);
      @(posedge clk); #1;
      check(dout == gain(a), $sformatf("init entry %0d: %h vs %h", a, dout, gain(a)));
    end
    // The read data must not appear before the clock edge.
    @(negedge clk); addr = 8'd3;
    @(posedge clk); #1;
    @(negedge clk); addr = 8'd200; #1;
    check(dout == gain(3), "read must wait for the clock edge");
    for (int a = 0; a < 256; a++) model[a] = gain(a);
    // Run-time writes and read-back.
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      addr = 8'($urandom);
      we   = 1'($urandom);
      di   = 16'($urandom);
      @(posedge clk); #1;
      check(dout == model[addr], $sformatf("read-first at %0d", addr));
      if (we) model[addr] = di;
    end
    we = 1'b0;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); addr = 8'(a);
      @(posedge clk); #1;
      check(dout == model[a], $sformatf("read-back %0d", a));
    end
    // EN low holds the output; RST clears it.
    @(negedge clk); en = 1'b0; addr = 8'd7;
    @(posedge clk); #1;
    check(dout == model[255], "EN low must hold the output");
    @(negedge clk); en = 1'b1; rst = 1'b1;
    @(posedge clk); #1;
    check(dout == '0, "RST must clear the output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
