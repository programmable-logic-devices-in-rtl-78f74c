// tb_pipelined_multiplier: self-checking test of the clocked signed x unsigned
// multiplier. Random and corner operands; the product must appear exactly one
// clock after the operands and equal the integer product computed here.
module tb_pipelined_multiplier;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic signed [11:0] a;
  logic        [15:0] b;
  logic signed [27:0] p;

  pipelined_multiplier #(.A_W(12), .B_W(16)) dut (.clk, .a, .b, .p);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expect_prev;
    a = '0; b = '0;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      case (n)
        0: begin a = -12'sd2048; b = 16'hffff; end
        1: begin a =  12'sd2047; b = 16'hffff; end
        2: begin a = -12'sd1;    b = 16'h8000; end
        default: begin a = 12'($urandom); b = 16'($urandom); end
      endcase
      expect_prev = longint'(a) * longint'(b);
      @(posedge clk); #1;
      check(longint'(p) == expect_prev, $sformatf("%0d * %0d = %0d, got %0d", a, b, expect_prev, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
