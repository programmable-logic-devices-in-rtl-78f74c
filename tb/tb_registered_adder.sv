// tb_registered_adder: self-checking test of the clocked adder (12-bit signed
// plus 21-bit signed, 21-bit wrapping sum). The sum must appear one clock after
// the operands and equal the integer sum modulo 2**21.
module tb_registered_adder;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic signed [11:0] a;
  logic signed [20:0] b, q;

  registered_adder #(.A_W(12), .B_W(21)) dut (.clk, .a, .b, .q);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    a = '0; b = '0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a = 12'($urandom);
      b = (n < 20) ? 21'sd1048575 - 21'(n) : 21'($urandom);
      s = longint'(a) + longint'(b);
      if (s >  1048575) s -= 2097152;
      if (s < -1048576) s += 2097152;
      @(posedge clk); #1;
      check(longint'(q) == s, $sformatf("%0d + %0d = %0d, got %0d", a, b, s, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
