// memory_unit: the j-particle memory of the board.
//
// Four 16K x 32-bit SRAM modules side by side form 16K words of 128 bits
// (2 Mbit). The interface unit writes 32 bits at a time: 'we_lane'
// selects the module (lane 0 = bits 31:0 ... lane 3 = bits 127:96) and
// 'addr' the word, with data on 'wdata'. For reading, all four modules
// share 'addr' and the 128-bit word is registered onto 'jdata', which
// feeds both pipeline chips: address in clock t, data on 'jdata' in
// clock t+1. Addresses come from the control unit.
//
// Sizes and widths are the machine's; the output register is this
// design's choice.
module memory_unit
  import progrape1_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic [AW-1:0]      addr,
  input  logic [N_SRAM-1:0]  we_lane,
  input  logic [31:0]        wdata,
  output logic [JDATA_W-1:0] jdata
);

  logic [31:0] rd [N_SRAM];

  for (genvar k = 0; k < N_SRAM; k++) begin : g_sram
    sram_module #(.DEPTH(DEPTH), .W(32)) u_sram (
      .clk(clk), .we(we_lane[k]), .addr(addr), .din(wdata), .dout(rd[k]));
  end

  always_ff @(posedge clk)
    for (int k = 0; k < N_SRAM; k++) jdata[32*k +: 32] <= rd[k];

endmodule
