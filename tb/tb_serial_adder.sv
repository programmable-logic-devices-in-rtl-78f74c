// tb_serial_adder: self-checking test of the bit-serial adder/subtractor.
// 32-bit random and corner operands, both add and subtract; the sum must equal
// a + b (or a - b) modulo 2**32 and `valid` must come exactly W = 32 cycles
// after `start`. Starts are given back to back and after idle gaps.
module tb_serial_adder;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int W = 32;
  logic                rst, start, sub, valid, busy;
  logic signed [W-1:0] a, b, sum;

  serial_adder #(.W(W)) dut (.clk, .rst, .start, .a, .b, .sub, .sum, .valid, .busy);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_s;
    int lat;
    logic [W-1:0] hold;
    rst = 1'b1; start = 1'b0; a = '0; b = '0; sub = 1'b0; hold = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    for (int n = 0; n < 1500; n++) begin
      if (n % 5 == 4) repeat ($urandom_range(1, 3)) @(negedge clk);
      case (n)
        0: begin a = 32'sh7fff_ffff; b = 32'sd1; sub = 1'b0; end
        1: begin a = 32'sh8000_0000; b = 32'sd1; sub = 1'b1; end
        2: begin a = 32'sd0; b = 32'sd0; sub = 1'b1; end
        3: begin a = -32'sd1; b = -32'sd1; sub = 1'b0; end
        default: begin a = 32'($urandom); b = 32'($urandom); sub = 1'($urandom); end
      endcase
      expect_s = sub ? W'(a - b) : W'(a + b);
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0; a = 32'($urandom); b = 32'($urandom); sub = 1'($urandom);
      lat = 1;
      while (!valid && lat < 100) begin
        if (n > 0) check(sum == hold, "previous sum held during the operation");
        @(posedge clk); #1; lat++;
      end
      check(lat == W, $sformatf("latency %0d", lat));
      check(sum == expect_s, $sformatf("op %0d: sum %h, expected %h", n, sum, expect_s));
      check(!busy, "idle in the valid cycle");
      // Start the next operation right away only every other time, and check
      // that the result holds while the adder is idle or busy again.
      hold = sum;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
