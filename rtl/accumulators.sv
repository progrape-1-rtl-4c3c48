// accumulators: force accumulators (ACC, the "Sigma" blocks) of a
// pipeline unit.
//
// Three ACC_W-bit two's complement accumulators (fx, fy, fz) per virtual
// pipeline. While 'run' (the interaction pipeline's delayed run, runr)
// is high, the term 'fdata' is added into the accumulators of virtual
// pipeline 'vp'. The first term a virtual pipeline receives after run
// has been low replaces the old sum instead of adding to it, so every
// run starts from zero without a separate clear command.
//
// Readout: 'datao' is the 32-bit word selected by 'adr', combinationally:
// adr[2:0] = 0/1 fx low/high word, 2/3 fy, 4/5 fz, 6/7 read zero;
// adr[9:3] selects the virtual pipeline.
//
// The block and its ports are the machine's; the restart rule and the
// read map are this design's choice.
module accumulators
  import progrape1_pkg::*;
#(
  parameter int unsigned NVP  = 1,
  localparam int unsigned VPW = (NVP > 1) ? $clog2(NVP) : 1
) (
  input  logic               clk,
  input  logic               run,
  input  logic [VPW-1:0]     vp,
  input  fterm_t             fdata,
  input  logic [ADR_W-1:0]   adr,
  output logic [IDATA_W-1:0] datao
);

  logic signed [ACC_W-1:0] acc [NVP][3];
  logic [NVP-1:0] first = '1;

  logic signed [ACC_W-1:0] term [3];
  assign term[0] = ACC_W'(fdata.fx);
  assign term[1] = ACC_W'(fdata.fy);
  assign term[2] = ACC_W'(fdata.fz);

  always_ff @(posedge clk) begin
    if (!run) begin
      first <= '1;
    end else begin
      first[vp] <= 1'b0;
      for (int k = 0; k < 3; k++)
        acc[vp][k] <= (first[vp] ? '0 : acc[vp][k]) + term[k];
    end
  end

  logic [VPW-1:0] rvp;
  logic [1:0]     axis;
  logic [ACC_W-1:0] sel;
  assign rvp  = VPW'(adr[ADR_W-1:3]);
  assign axis = adr[2:1];

  always_comb begin
    datao = '0;
    sel   = '0;
    if (32'(adr[ADR_W-1:3]) < NVP && axis != 2'd3) begin
      sel   = acc[rvp][axis];
      datao = adr[0] ? sel[ACC_W-1:32] : sel[31:0];
    end
  end

endmodule
