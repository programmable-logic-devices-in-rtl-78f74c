// ramblock: one FPGA block RAM used as a look-up table (LUT).
//
// The RAM holds 2**ADDR_W words of DATA_W bits. Used as a function f, the
// address is the function's argument and the word read back is f of it. On the
// paper's device one block holds 4096 bits, so ADDR_W input bits leave
// DATA_W = 2**(12-ADDR_W) output bits; the default partition (8, 16) is the one
// the paper's adaptive phase listing uses (ADDR => time_8, DO => Gtime_16).
// The port names EN, WE, RST, ADDR, DI, DO follow that listing.
//
// Timing: read and write take one clock cycle, as the paper states. With EN
// high, DO shows mem[ADDR] one cycle after ADDR is presented (read-first: a
// write returns the old word). RST clears the output register synchronously.
// The table is loaded from INIT_FILE (hex, one word per line) at configuration,
// standing in for the paper's "block of data used as a parameter in the LUT
// component"; with INIT_FILE empty the RAM starts at zero. Any word can also be
// rewritten while running through WE/DI, which the paper mentions as an option.
// The read-first write behaviour and the synchronous RST are this design's choices.
module ramblock #(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned DATA_W = 16,
  parameter string       INIT_FILE = ""
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic              rst,
  input  logic [ADDR_W-1:0] addr,
  input  logic [DATA_W-1:0] di,
  output logic [DATA_W-1:0] dout
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
    else for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (en && we) mem[addr] <= di;
  end

  always_ff @(posedge clk) begin
    if (rst)     dout <= '0;
    else if (en) dout <= mem[addr];
  end

endmodule
