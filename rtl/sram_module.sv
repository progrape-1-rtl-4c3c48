// sram_module: one 512 Kbit static RAM module of the memory unit
// (16K words x 32 bits, separate data input and output, as the IDT
// 7MC4032 used on the board).
//
// A write stores 'din' at 'addr' on the clock edge where 'we' is high.
// The read is asynchronous: 'dout' shows the word at 'addr' in the same
// clock. Written as a plain array; the device's access times are not
// modelled.
module sram_module #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  din,
  output logic [W-1:0]  dout
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[addr] <= din;

  assign dout = mem[addr];

endmodule
