// interface_unit: the host side of the board.
//
// The host link is modelled as a word channel: the host offers a word
// with 'host_valid' (mode, address, 32-bit data) and it is taken on a
// clock edge where 'host_ready' is also high. Modes follow the board's
// five transfer types (progrape1_pkg::host_mode_e). The unit keeps one
// word pending: it presents it to the control unit ('req_*'), drives its
// data on the board's 32-bit write bus 'wdata' (to the memory unit, the
// IDATA pins of both pipeline chips and the configuration port), and
// frees itself on 'req_ack'. While a word is pending 'host_ready' is
// low; during a run the control unit does not acknowledge, which stalls
// the host.
//
// Results: the two chips' IDATA outputs share one bus, resolved here by
// their output enables. On 'rd_capture' the bus is sampled into
// 'host_rdata', announced by a one-clock 'host_rvalid'.
//
// The five modes and the data paths are the machine's; the word channel
// stands in for the real host link, whose protocol is not modelled.
module interface_unit
  import progrape1_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // host link
  input  logic                 host_valid,
  output logic                 host_ready,
  input  host_mode_e           host_mode,
  input  logic [HADDR_W-1:0]   host_addr,
  input  logic [31:0]          host_wdata,
  output logic                 host_rvalid,
  output logic [31:0]          host_rdata,
  // to the control unit
  output logic                 req_valid,
  output host_mode_e           req_mode,
  output logic [HADDR_W-1:0]   req_addr,
  output logic [31:0]          req_wdata,
  input  logic                 req_ack,
  input  logic                 rd_capture,
  // board data buses
  output logic [31:0]          wdata,
  input  logic [31:0]          pipe_rdata [N_CHIPS],
  input  logic [N_CHIPS-1:0]   pipe_oe
);

  logic [31:0] bus;

  always_comb begin
    bus = '0;
    for (int k = 0; k < N_CHIPS; k++)
      if (pipe_oe[k]) bus = bus | pipe_rdata[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_valid   <= 1'b0;
      req_mode    <= MODE_NONE;
      req_addr    <= '0;
      req_wdata   <= '0;
      host_rvalid <= 1'b0;
      host_rdata  <= '0;
    end else begin
      host_rvalid <= 1'b0;
      if (req_valid && req_ack) req_valid <= 1'b0;
      if (host_valid && host_ready) begin
        req_valid <= 1'b1;
        req_mode  <= host_mode;
        req_addr  <= host_addr;
        req_wdata <= host_wdata;
      end
      if (rd_capture) begin
        host_rdata  <= bus;
        host_rvalid <= 1'b1;
      end
    end
  end

  assign host_ready = !req_valid;
  assign wdata      = req_wdata;

  // Bus rules: at most one chip drives IDATA; the control unit only
  // acknowledges a pending request.
  always_ff @(posedge clk) begin
    assert (!(pipe_oe[0] && pipe_oe[1])) else $error("two chips drive IDATA");
    assert (!req_ack || req_valid) else $error("ack without a request");
  end

endmodule
