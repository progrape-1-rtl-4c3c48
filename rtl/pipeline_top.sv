// pipeline_top: one pipeline FPGA chip of the board, configured with the
// gravity pipeline: I/O interface (io), memory interface (mi) and
// pipeline unit (pu).
//
// Pins: JDATA[127:0] from the memory unit, IDATA[31:0] to and from the
// interface unit (split here into in, out and output enable), ADR[9:0],
// CS, WE, RE, RUN and CLK. The configuration port of the real chip is
// not part of this model.
//
// Timing: a j-particle on JDATA together with RUN high in clock t enters
// the interaction pipeline in clock t+1 and reaches the accumulators in
// clock t+7. Reads: RE in clock t, data on IDATA in clock t+2. Writes:
// data, ADR, CS and WE in clock t, the i-register holds it from t+2.
// The chip has no reset pin; its registers start from the state the
// configuration leaves them in (zero).
module pipeline_top
  import progrape1_pkg::*;
#(
  parameter int unsigned NVP = 1
) (
  input  logic               i_clk,
  input  logic [JDATA_W-1:0] i_jdata,
  input  logic [IDATA_W-1:0] i_data_in,
  output logic [IDATA_W-1:0] i_data_out,
  output logic               i_data_oe,
  input  logic [ADR_W-1:0]   i_adr,
  input  logic               i_cs,
  input  logic               i_we,
  input  logic               i_re,
  input  logic               i_run
);

  logic [JDATA_W-1:0] jdata;
  logic [IDATA_W-1:0] datai, datao;
  logic [ADR_W-1:0]   adr;
  logic               run, we;

  io u_io (
    .clk(i_clk), .i_data_in(i_data_in), .i_data_out(i_data_out), .i_data_oe(i_data_oe),
    .i_adr(i_adr), .i_cs(i_cs), .i_we(i_we), .i_re(i_re), .i_run(i_run),
    .datai(datai), .adr(adr), .run(run), .we(we), .datao(datao));

  mi u_mi (.clk(i_clk), .i_jdata(i_jdata), .jdata(jdata));

  pu #(.NVP(NVP)) u_pu (
    .clk(i_clk), .datai(datai), .jdata(jdata), .we(we), .adr(adr), .run(run),
    .datao(datao));

endmodule
