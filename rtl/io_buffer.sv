// io_buffer: registered buffer between a converter and the FPGA logic.
//
// A plain DEPTH-stage register pipeline of W bits: the word on `d` appears on
// `q` DEPTH clock cycles later, one word per cycle. The paper measures that the
// FPGA's buffers add 4 cycles of delay when the chip just passes the ADC signal
// on to the DAC; this design puts 2 stages at each input and 2 at each output
// (the split is its choice). The stages reset to zero.
module io_buffer #(
  parameter int unsigned W     = 12,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] stage [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
    end else begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
  end

  always_comb q = stage[DEPTH-1];

endmodule
