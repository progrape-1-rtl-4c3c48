// pu: pipeline unit of a pipeline chip: i-registers (IREG), the gravity
// interaction function pipeline (IFP) and the accumulators (ACC).
//
// While 'run' is high, each clock feeds one j-particle ('jdata') and the
// i-particle of the current virtual pipeline into the IFP. The virtual
// pipeline index counts 0..NVP-1 and wraps, so with NVP > 1 the board
// must present each j-particle for NVP consecutive clocks; with NVP = 1
// (one physical pipeline, the machine's gravity configuration) it stays
// 0. The index travels beside the IFP (LAT = 6 clocks) so that each term
// lands in the accumulators of its own i-particle.
//
// Host side: 'we'/'adr'/'datai' write the i-registers, 'adr' selects the
// accumulator word on 'datao' (combinational). See i_register and
// accumulators for the address map.
module pu
  import progrape1_pkg::*;
#(
  parameter int unsigned NVP  = 1,
  localparam int unsigned VPW = (NVP > 1) ? $clog2(NVP) : 1
) (
  input  logic               clk,
  input  logic [IDATA_W-1:0] datai,
  input  logic [JDATA_W-1:0] jdata,
  input  logic               we,
  input  logic [ADR_W-1:0]   adr,
  input  logic               run,
  output logic [IDATA_W-1:0] datao
);

  localparam int unsigned LAT = 6;

  logic [VPW-1:0] vp = '0;
  logic [VPW-1:0] vpr;
  logic           runr;
  ipart_t         idata;
  fterm_t         fdata;

  always_ff @(posedge clk) begin
    if (!run || 32'(vp) == NVP - 1) vp <= '0;
    else                            vp <= vp + 1'b1;
  end

  i_register #(.NVP(NVP)) u_ireg (
    .clk(clk), .we(we), .adr(adr), .datai(datai), .vp(vp), .idata(idata));

  gravity_ifp u_ifp (
    .clk(clk), .run(run), .jdata(jdata), .idata(idata), .runr(runr), .fdata(fdata));

  delay_line #(.W(VPW), .DEPTH(LAT)) u_vpd (.clk(clk), .d(vp), .q(vpr));

  accumulators #(.NVP(NVP)) u_acc (
    .clk(clk), .run(runr), .vp(vpr), .fdata(fdata), .adr(adr), .datao(datao));

endmodule
