// progrape1_top: the PROGRAPE-1 board.
//
// A host computer loads j-particles (positions) into the memory unit,
// writes one i-particle (position and softening) into each pipeline chip,
// and starts the control unit. The control unit then streams the
// j-particle words out of the memory unit to both pipeline chips at one
// word per clock with RUN; each chip evaluates the gravitational pull of
// every j-particle on its own i-particle and sums it. The host reads the
// three force sums of each chip back over the 32-bit bus. With two chips
// the board computes the forces on two i-particles per pass over
// memory.
//
// Units: interface_unit (host words, data buses), control_unit (all
// strobes, addresses and RUN), memory_unit (4 x 16K x 32-bit SRAM, 128
// bits to the chips), two pipeline_top chips. The chips' configuration
// port is not modelled: configuration words from the host leave the
// board on 'cfg_data' with one strobe per chip on 'cfg_wr'.
//
// Host link (see interface_unit): host_valid/host_ready word channel with
// mode, 16-bit address and 32-bit data; reads return on host_rvalid.
// Address formats per mode are described in control_unit.
module progrape1_top
  import progrape1_pkg::*;
#(
  parameter int unsigned NVP   = 1,
  parameter int unsigned DEPTH = 16384
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_valid,
  output logic               host_ready,
  input  host_mode_e         host_mode,
  input  logic [HADDR_W-1:0] host_addr,
  input  logic [31:0]        host_wdata,
  output logic               host_rvalid,
  output logic [31:0]        host_rdata,
  output logic [31:0]        cfg_data,
  output logic [N_CHIPS-1:0] cfg_wr,
  output logic               busy
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic               req_valid, req_ack, rd_capture;
  host_mode_e         req_mode;
  logic [HADDR_W-1:0] req_addr;
  logic [31:0]        req_wdata, wdata;
  logic [AW-1:0]      mem_addr;
  logic [N_SRAM-1:0]  mem_we;
  logic [N_CHIPS-1:0] pipe_cs;
  logic               pipe_we, pipe_re, pipe_run;
  logic [ADR_W-1:0]   pipe_adr;
  logic [JDATA_W-1:0] jdata;
  logic [31:0]        pipe_rdata [N_CHIPS];
  logic [N_CHIPS-1:0] pipe_oe;

  interface_unit u_if (
    .clk(clk), .rst_n(rst_n),
    .host_valid(host_valid), .host_ready(host_ready), .host_mode(host_mode),
    .host_addr(host_addr), .host_wdata(host_wdata),
    .host_rvalid(host_rvalid), .host_rdata(host_rdata),
    .req_valid(req_valid), .req_mode(req_mode), .req_addr(req_addr),
    .req_wdata(req_wdata), .req_ack(req_ack), .rd_capture(rd_capture),
    .wdata(wdata), .pipe_rdata(pipe_rdata), .pipe_oe(pipe_oe));

  control_unit #(.DEPTH(DEPTH)) u_ctl (
    .clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_mode(req_mode), .req_addr(req_addr),
    .req_wdata(req_wdata), .req_ack(req_ack), .rd_capture(rd_capture),
    .mem_addr(mem_addr), .mem_we(mem_we),
    .pipe_cs(pipe_cs), .pipe_we(pipe_we), .pipe_re(pipe_re), .pipe_run(pipe_run),
    .pipe_adr(pipe_adr), .cfg_wr(cfg_wr), .busy(busy));

  memory_unit #(.DEPTH(DEPTH)) u_mem (
    .clk(clk), .addr(mem_addr), .we_lane(mem_we), .wdata(wdata), .jdata(jdata));

  for (genvar k = 0; k < N_CHIPS; k++) begin : g_chip
    pipeline_top #(.NVP(NVP)) u_chip (
      .i_clk(clk), .i_jdata(jdata),
      .i_data_in(wdata), .i_data_out(pipe_rdata[k]), .i_data_oe(pipe_oe[k]),
      .i_adr(pipe_adr), .i_cs(pipe_cs[k]), .i_we(pipe_we), .i_re(pipe_re),
      .i_run(pipe_run));
  end

  assign cfg_data = wdata;

endmodule
