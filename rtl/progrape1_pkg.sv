// progrape1_pkg: widths, number formats and encodings shared by the
// PROGRAPE-1 board and its gravity pipeline chips.
//
// Board-level widths follow the machine as built: a 128-bit j-particle
// word from four 32-bit SRAM modules of 16K words, a 32-bit i-data bus
// and a 10-bit register address at each pipeline chip, two pipeline
// chips per board.
//
// Number formats are this design's own choice, modelled on a GRAPE-3
// style chip: positions are 20-bit two's complement fixed point, the
// arithmetic between subtraction and accumulation is done on a
// logarithmic word (sign, non-zero flag, signed log2 magnitude with
// five fraction bits), and forces are summed in 64-bit fixed point with
// 32 fraction bits (one unit = one position LSB^-2, unit mass).
//
// The two 32-entry tables below are the only constants of the
// arithmetic:
//   LOG2_TAB[k] = round(32 * log2(1 + k/32))      k = 0..31
//   EXP2_TAB[k] = round(256 * (2^(k/32) - 1))      k = 0..31
package progrape1_pkg;

  // ---- board ----
  localparam int unsigned JDATA_W = 128;  // memory unit to pipeline chips
  localparam int unsigned IDATA_W = 32;   // host data bus, IDATA pins
  localparam int unsigned ADR_W   = 10;   // ADR pins of a pipeline chip
  localparam int unsigned MEM_AW  = 14;   // 16K j-particle words
  localparam int unsigned N_SRAM  = 4;    // 32-bit SRAM modules
  localparam int unsigned N_CHIPS = 2;    // pipeline chips
  localparam int unsigned HADDR_W = 16;   // host word address

  // Host communication modes, numbered in the order of the machine's
  // five transfer types.
  typedef enum logic [2:0] {
    MODE_NONE    = 3'd0,
    MODE_CMD     = 3'd1,  // command to the control unit
    MODE_MEM     = 3'd2,  // j-particle data to the memory unit
    MODE_PIPE_WR = 3'd3,  // i-particle data to a pipeline chip
    MODE_PIPE_RD = 3'd4,  // result from a pipeline chip to the host
    MODE_CONFIG  = 3'd5   // configuration data to a pipeline chip
  } host_mode_e;

  // Control-unit command registers (MODE_CMD, host address bits [1:0]).
  localparam logic [1:0] CMD_NJ    = 2'd0;  // number of j-particles
  localparam logic [1:0] CMD_NHOLD = 2'd1;  // clocks per j-particle
  localparam logic [1:0] CMD_START = 2'd2;  // start the j loop

  // ---- pipeline number formats ----
  localparam int unsigned POS_W   = 20;         // position, fixed point
  localparam int unsigned DX_W    = POS_W + 1;  // xj - xi
  localparam int unsigned LOGF_W  = 5;          // log2 fraction bits
  localparam int unsigned LOGI_W  = 8;          // log2 integer bits (signed)
  localparam int unsigned LG_W    = LOGI_W + LOGF_W;
  localparam int unsigned R2_W    = 48;         // R^2 sum, fixed point
  localparam int unsigned R2_FRAC = 4;
  localparam int unsigned FTERM_W = 34;         // |force term|, fixed point
  localparam int unsigned FORCE_FRAC = 32;
  localparam int unsigned ACC_W   = 64;         // force accumulator

  localparam logic signed [LG_W-1:0] LG_MAX = {1'b0, {(LG_W-1){1'b1}}};
  localparam logic signed [LG_W-1:0] LG_MIN = {1'b1, {(LG_W-1){1'b0}}};

  // Logarithmic word: value = (-1)^sgn * 2^(lg / 32) when nz, else 0.
  typedef struct packed {
    logic                   sgn;
    logic                   nz;
    logic        [LG_W-1:0] lg;
  } lns_t;

  localparam int unsigned LNS_W = $bits(lns_t);

  // i-particle data held in the i-registers of one virtual pipeline.
  typedef struct packed {
    logic signed [POS_W-1:0] x;
    logic signed [POS_W-1:0] y;
    logic signed [POS_W-1:0] z;
    lns_t                    eps2;
  } ipart_t;

  // One force term per axis, two's complement, FORCE_FRAC fraction bits.
  typedef struct packed {
    logic signed [FTERM_W:0] fx;
    logic signed [FTERM_W:0] fy;
    logic signed [FTERM_W:0] fz;
  } fterm_t;

  // i-register / accumulator addresses inside a chip (ADR[2:0]).
  localparam logic [2:0] IREG_X    = 3'd0;
  localparam logic [2:0] IREG_Y    = 3'd1;
  localparam logic [2:0] IREG_Z    = 3'd2;
  localparam logic [2:0] IREG_EPS2 = 3'd3;

  typedef logic [LOGF_W-1:0] tab_t [32];
  localparam tab_t LOG2_TAB = '{
    5'd0,  5'd1,  5'd3,  5'd4,  5'd5,  5'd7,  5'd8,  5'd9,
    5'd10, 5'd11, 5'd13, 5'd14, 5'd15, 5'd16, 5'd17, 5'd18,
    5'd19, 5'd20, 5'd21, 5'd22, 5'd22, 5'd23, 5'd24, 5'd25,
    5'd26, 5'd27, 5'd27, 5'd28, 5'd29, 5'd30, 5'd31, 5'd31};

  typedef logic [7:0] etab_t [32];
  localparam etab_t EXP2_TAB = '{
    8'd0,   8'd6,   8'd11,  8'd17,  8'd23,  8'd29,  8'd36,  8'd42,
    8'd48,  8'd55,  8'd62,  8'd69,  8'd76,  8'd83,  8'd91,  8'd98,
    8'd106, 8'd114, 8'd122, 8'd130, 8'd139, 8'd147, 8'd156, 8'd165,
    8'd175, 8'd184, 8'd194, 8'd203, 8'd214, 8'd224, 8'd234, 8'd245};

endpackage
