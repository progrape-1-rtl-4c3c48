// i_register: the i-particle registers (IREG) of a pipeline unit.
//
// Holds, for each of NVP virtual pipelines, the position (xi, yi, zi) and
// the softening eps^2 of one i-particle. The host writes them through the
// chip's I/O interface: 'we' with 'adr' and 'datai'. adr[2:0] selects the
// field (0 xi, 1 yi, 2 zi, 3 eps^2 as a log word in the low 15 bits),
// adr[9:3] the virtual pipeline; other addresses are ignored. Positions
// use the low 20 bits of the data word.
//
// 'vp' is the virtual pipeline the interaction pipeline is working on in
// this clock; 'idata' is its record, read combinationally. Writes take
// effect at the next clock edge.
//
// The block, its ports and the NVP parameter are the machine's; the
// register map is this design's choice.
module i_register
  import progrape1_pkg::*;
#(
  parameter int unsigned NVP  = 1,
  localparam int unsigned VPW = (NVP > 1) ? $clog2(NVP) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [ADR_W-1:0]   adr,
  input  logic [IDATA_W-1:0] datai,
  input  logic [VPW-1:0]     vp,
  output ipart_t             idata
);

  ipart_t regs [NVP];
  logic [VPW-1:0] wvp;
  logic           wvp_ok;

  assign wvp    = VPW'(adr[ADR_W-1:3]);
  assign wvp_ok = 32'(adr[ADR_W-1:3]) < NVP;

  always_ff @(posedge clk) begin
    if (we && wvp_ok) begin
      case (adr[2:0])
        IREG_X:    regs[wvp].x    <= datai[POS_W-1:0];
        IREG_Y:    regs[wvp].y    <= datai[POS_W-1:0];
        IREG_Z:    regs[wvp].z    <= datai[POS_W-1:0];
        IREG_EPS2: regs[wvp].eps2 <= datai[LNS_W-1:0];
        default: ;
      endcase
    end
  end

  assign idata = regs[vp];

endmodule
