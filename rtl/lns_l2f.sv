// lns_l2f: logarithmic to fixed-point conversion ("L->F" of the gravity
// pipeline, also used inside the R^2 unit).
//
// For a word with value 2^(lg/32) the integer part e = floor(lg/32) sets
// a shift and the fraction f = lg mod 32 selects the mantissa
// 1 + EXP2_TAB[f]/256, where EXP2_TAB[f] = round(256*(2^(f/32)-1)). The
// 9-bit mantissa is shifted to an OUT_W-bit magnitude with OUT_FRAC
// fraction bits; bits shifted out at the bottom are truncated and values
// above the range saturate to all ones. nz = 0 gives zero. The sign is
// passed on separately.
//
// Purely combinational. The conversion method is this design's choice.
module lns_l2f
  import progrape1_pkg::*;
#(
  parameter int unsigned OUT_W    = FTERM_W,
  parameter int          OUT_FRAC = FORCE_FRAC
) (
  input  lns_t             a,
  output logic [OUT_W-1:0] mag,
  output logic             sgn
);

  int e, s;
  logic [OUT_W-1:0] mw;

  always_comb begin
    e   = int'($signed(a.lg)) >>> LOGF_W;
    mw  = OUT_W'({1'b1, EXP2_TAB[a.lg[LOGF_W-1:0]]});
    s   = e + OUT_FRAC - 8;
    sgn = a.sgn;
    if (!a.nz)               mag = '0;
    else if (s > int'(OUT_W) - 9) mag = '1;
    else if (s >= 0)         mag = mw << s;
    else if (s <= -9)        mag = '0;
    else                     mag = mw >> (-s);
  end

endmodule
