// io: the I/O interface (IO) of a pipeline chip.
//
// Registers the host-side pins of the chip: CS, WE, RE, RUN, ADR[9:0]
// and the incoming IDATA[31:0], and hands them to the pipeline unit as
// 'we' (= CS and WE), 'adr', 'datai' and 'run'. RUN is not qualified by
// CS, so one RUN line starts every chip on the board.
//
// A read is CS and RE: the pipeline unit returns the word for 'adr' on
// 'datao', which is registered and driven on IDATA (i_data_out with
// i_data_oe high) for one clock. Timing: RE on the pins in clock t, data
// on the pins in clock t+2. The bidirectional IDATA pin is modelled as
// separate in, out and output-enable signals; the board resolves the
// shared bus.
//
// The pins are the machine's; the register stages and the read latency
// are this design's choice.
module io
  import progrape1_pkg::*;
(
  input  logic               clk,
  input  logic [IDATA_W-1:0] i_data_in,
  output logic [IDATA_W-1:0] i_data_out,
  output logic               i_data_oe = 1'b0,
  input  logic [ADR_W-1:0]   i_adr,
  input  logic               i_cs,
  input  logic               i_we,
  input  logic               i_re,
  input  logic               i_run,
  output logic [IDATA_W-1:0] datai,
  output logic [ADR_W-1:0]   adr,
  output logic               run = 1'b0,
  output logic               we = 1'b0,
  input  logic [IDATA_W-1:0] datao
);

  logic re_q = 1'b0;

  always_ff @(posedge clk) begin
    datai      <= i_data_in;
    adr        <= i_adr;
    run        <= i_run;
    we         <= i_cs & i_we;
    re_q       <= i_cs & i_re;
    i_data_oe  <= re_q;
    i_data_out <= re_q ? datao : '0;
  end

endmodule
