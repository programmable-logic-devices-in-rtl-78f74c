// tb_io_buffer: self-checking test of the I/O register pipeline. A random
// word stream must come out unchanged exactly DEPTH clocks later (checked for
// DEPTH = 2, the per-side depth, and DEPTH = 4, the whole identity path), and
// reset must clear every stage.
module tb_io_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        rst;
  logic [11:0] d, q2, q4;
  logic [11:0] hist [$];

  io_buffer #(.W(12), .DEPTH(2)) dut2 (.clk, .rst, .d, .q(q2));
  io_buffer #(.W(12), .DEPTH(4)) dut4 (.clk, .rst, .d, .q(q4));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; d = '0;
    repeat (2) @(posedge clk);
    #1 check(q2 == '0 && q4 == '0, "reset clears the stages");
    @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      d = 12'($urandom);
      hist.push_front(d);
      @(posedge clk); #1;
      // hist[0] was presented in the cycle just ended; a word presented in
      // cycle c is on q in cycle c + DEPTH, i.e. now if it is hist[DEPTH-1].
      if (hist.size() >= 2) check(q2 == hist[1], $sformatf("depth 2, cycle %0d", n));
      if (hist.size() >= 4) check(q4 == hist[3], $sformatf("depth 4, cycle %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
