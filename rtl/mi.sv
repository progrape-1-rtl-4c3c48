// mi: the memory interface (MI) of a pipeline chip.
//
// Registers the 128-bit j-particle word arriving on the JDATA pins from
// the memory unit and passes it to the pipeline unit one clock later,
// in step with RUN, which the I/O interface also registers once.
// The single register stage is this design's choice.
module mi
  import progrape1_pkg::*;
(
  input  logic               clk,
  input  logic [JDATA_W-1:0] i_jdata,
  output logic [JDATA_W-1:0] jdata
);

  always_ff @(posedge clk) jdata <= i_jdata;

endmodule
