// control_unit: generates every control signal of the board.
//
// It serves one host request at a time, handed over by the interface
// unit ('req_valid' with mode, address and data held until 'req_ack'):
//   MODE_CMD      writes a command register (address bits [1:0]):
//                 0 number of j-particles NJ, 1 clocks per j-particle
//                 NHOLD (number of virtual pipelines, 0 counts as 1),
//                 2 start the j loop;
//   MODE_MEM      one-clock write strobe to SRAM lane addr[1:0] at word
//                 addr[15:2];
//   MODE_PIPE_WR  one-clock CS+WE to chip addr[10] at ADR = addr[9:0];
//   MODE_PIPE_RD  one-clock CS+RE to chip addr[10], then 'rd_capture' two
//                 clocks later, when the chip drives IDATA;
//   MODE_CONFIG   one-clock configuration strobe to chip addr[0].
// 'req_ack' is high for one clock when the request is finished.
//
// The j loop: after a start command the unit puts addresses 0..NJ-1 on
// the memory unit, each for NHOLD clocks, and raises RUN one clock later
// (the memory unit's read register), so RUN and the j-particle word
// reach the pipeline chips together. It then waits DRAIN clocks for the
// pipelines to empty. 'busy' is high from the start command to the end
// of the drain; host requests wait (are not acknowledged) meanwhile.
// busy lasts NJ*NHOLD + DRAIN + 1 clocks.
//
// That the control unit drives all control signals from host commands is
// the machine's; the command registers, the stall and all timing are
// this design's choice.
module control_unit
  import progrape1_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned DRAIN = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  input  host_mode_e           req_mode,
  input  logic [HADDR_W-1:0]   req_addr,
  input  logic [31:0]          req_wdata,
  output logic                 req_ack,
  output logic                 rd_capture,
  output logic [AW-1:0]        mem_addr,
  output logic [N_SRAM-1:0]    mem_we,
  output logic [N_CHIPS-1:0]   pipe_cs,
  output logic                 pipe_we,
  output logic                 pipe_re,
  output logic                 pipe_run,
  output logic [ADR_W-1:0]     pipe_adr,
  output logic [N_CHIPS-1:0]   cfg_wr,
  output logic                 busy
);

  typedef enum logic [2:0] {
    S_IDLE, S_DONE, S_RD1, S_RD2, S_RD3, S_RUN, S_DRAIN
  } state_e;

  state_e      state;
  logic [AW:0] nj;          // up to DEPTH particles
  logic [15:0] nhold;
  logic [AW:0] j;
  logic [15:0] h;
  logic [15:0] cnt;
  logic        start_pend;
  logic        issue;

  logic [0:0] chip;
  assign chip = req_addr[ADR_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      nj         <= '0;
      nhold      <= 16'd1;
      j          <= '0;
      h          <= '0;
      cnt        <= '0;
      start_pend <= 1'b0;
      issue      <= 1'b0;
      mem_addr   <= '0;
      mem_we     <= '0;
      pipe_cs    <= '0;
      pipe_we    <= 1'b0;
      pipe_re    <= 1'b0;
      pipe_run   <= 1'b0;
      pipe_adr   <= '0;
      cfg_wr     <= '0;
    end else begin
      // strobes last one clock
      mem_we   <= '0;
      pipe_cs  <= '0;
      pipe_we  <= 1'b0;
      pipe_re  <= 1'b0;
      cfg_wr   <= '0;
      pipe_run <= issue;
      issue    <= 1'b0;

      unique case (state)
        S_IDLE: if (req_valid) begin
          state <= S_DONE;
          unique case (req_mode)
            MODE_CMD: unique case (req_addr[1:0])
              CMD_NJ:    nj    <= (32'(req_wdata) > DEPTH) ? (AW+1)'(DEPTH) : req_wdata[AW:0];
              CMD_NHOLD: nhold <= (req_wdata[15:0] == 16'd0) ? 16'd1 : req_wdata[15:0];
              CMD_START: start_pend <= (nj != '0);
              default: ;
            endcase
            MODE_MEM: begin
              mem_we[req_addr[1:0]] <= 1'b1;
              mem_addr              <= req_addr[AW+1:2];
            end
            MODE_PIPE_WR: begin
              pipe_cs[chip] <= 1'b1;
              pipe_we       <= 1'b1;
              pipe_adr      <= req_addr[ADR_W-1:0];
            end
            MODE_PIPE_RD: begin
              pipe_cs[chip] <= 1'b1;
              pipe_re       <= 1'b1;
              pipe_adr      <= req_addr[ADR_W-1:0];
              state         <= S_RD1;
            end
            MODE_CONFIG: cfg_wr[req_addr[0]] <= 1'b1;
            default: ;
          endcase
        end
        S_DONE: begin
          if (start_pend) begin
            start_pend <= 1'b0;
            state      <= S_RUN;
            j          <= '0;
            h          <= '0;
          end else begin
            state <= S_IDLE;
          end
        end
        S_RD1: state <= S_RD2;
        S_RD2: state <= S_RD3;
        S_RD3: state <= S_IDLE;
        S_RUN: begin
          mem_addr <= j[AW-1:0];
          issue    <= 1'b1;
          if (h == nhold - 16'd1) begin
            h <= '0;
            if (j == nj - 1'b1) begin
              state <= S_DRAIN;
              cnt   <= '0;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            h <= h + 16'd1;
          end
        end
        S_DRAIN: begin
          if (cnt == 16'(DRAIN - 1)) state <= S_IDLE;
          cnt <= cnt + 16'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign req_ack    = (state == S_DONE) || (state == S_RD3);
  assign rd_capture = (state == S_RD3);
  assign busy       = (state == S_RUN) || (state == S_DRAIN) || start_pend;

endmodule
