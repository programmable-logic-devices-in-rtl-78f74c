// tb_phase_sequencer: self-checking test of the pulse timing process.
//
// A small instance (TAU_EXPERIMENT = 10, TAU_DEAD = 5, TIME_SHIFT = 1, 3-bit
// address, so the address saturates) is compared cycle by cycle with a model
// of the counting rule: integrate while t < TAU_EXPERIMENT; at t = TAU_EXPERIMENT
// + TAU_DEAD wrap to 0; then increment. A default-size instance is checked for
// its frame period (6000 cycles) and the number of integrating cycles per frame.
module tb_phase_sequencer;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam int TAU = 10, DEAD = 5, SHIFT = 1, AW = 3, FRAME = TAU + DEAD;

  logic         rst;
  logic         integ, fs, integ_d, fs_d;
  logic [AW-1:0] taddr;
  logic [3:0]   t;
  logic [7:0]   taddr_d;
  logic [12:0]  t_d;

  phase_sequencer #(.TAU_EXPERIMENT(TAU), .TAU_DEAD(DEAD), .TIME_SHIFT(SHIFT), .ADDR_W(AW)) dut (
    .clk, .rst, .integrate(integ), .frame_start(fs), .time_addr(taddr), .t
  );
  phase_sequencer dut_default (
    .clk, .rst, .integrate(integ_d), .frame_start(fs_d), .time_addr(taddr_d), .t(t_d)
  );

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tm, last_fs, n_int, frames;
    int last_fs_d, n_int_d, frames_d;
    rst = 1'b1;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 1'b0;
    tm = FRAME;
    last_fs = -1; n_int = 0; frames = 0;
    for (int c = 0; c < 20 * FRAME; c++) begin
      #1;
      check(int'(t) == tm, $sformatf("cycle %0d: t=%0d, model %0d", c, t, tm));
      check(integ == (tm < TAU), $sformatf("cycle %0d: integrate", c));
      check(fs == (tm == 1), $sformatf("cycle %0d: frame_start", c));
      check(int'(taddr) == (((tm >> SHIFT) > 7) ? 7 : (tm >> SHIFT)),
            $sformatf("cycle %0d: time_addr %0d for t=%0d", c, taddr, tm));
      if (integ) n_int++;
      if (fs) begin
        if (last_fs >= 0) begin
          check(c - last_fs == FRAME, $sformatf("frame period %0d", c - last_fs));
          check(n_int == TAU - 1, $sformatf("integrating cycles per frame %0d", n_int));
          frames++;
        end
        last_fs = c; n_int = 0;
      end
      tm = (tm == FRAME) ? 1 : tm + 1;
      @(posedge clk);
    end
    check(frames == 19, "number of frames");
    // Default size: 5000 + 1000 cycles per frame, 4999 of them integrating.
    last_fs_d = -1; n_int_d = 0; frames_d = 0;
    for (int c = 0; c < 19000; c++) begin
      #1;
      if (integ_d) n_int_d++;
      if (fs_d) begin
        if (last_fs_d >= 0) begin
          check(c - last_fs_d == 6000, $sformatf("default frame period %0d", c - last_fs_d));
          check(n_int_d == 4999, $sformatf("default integrating cycles %0d", n_int_d));
          frames_d++;
        end
        last_fs_d = c; n_int_d = 0;
      end
      if (t_d == 13'd5000) check(taddr_d == 8'(5000 >> 5), "default address scaling");
      @(posedge clk);
    end
    check(frames_d == 2, "default frames seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
