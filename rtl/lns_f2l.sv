// lns_f2l: fixed-point to logarithmic conversion ("F->L" of the gravity
// pipeline).
//
// The input is an unsigned magnitude of IN_W bits with IN_FRAC fraction
// bits and a separate sign. The integer part of log2 is the position p of
// the leading one; the fraction comes from the five bits just below the
// leading one, looked up in LOG2_TAB (round(32*log2(1+k/32))). Bits below
// those five are truncated, so the relative error stays under about 3%.
// A zero input gives a word with nz = 0. Results outside the log range
// saturate.
//
// Purely combinational; the pipeline that uses it places the registers.
// The block and its place in the pipeline are the machine's; the
// conversion method and table size are this design's choice.
module lns_f2l
  import progrape1_pkg::*;
#(
  parameter int unsigned IN_W    = DX_W,
  parameter int          IN_FRAC = 0
) (
  input  logic [IN_W-1:0] mag,
  input  logic            sgn,
  output lns_t            q
);

  int unsigned p;
  logic [IN_W-1:0] norm;
  logic [LOGF_W:0]   m6;
  logic [LOGF_W+1:0] mr;
  int lg_i;

  always_comb begin
    p = 0;
    for (int unsigned b = 0; b < IN_W; b++)
      if (mag[b]) p = b;
    norm = mag << (IN_W - 1 - p);
    m6   = norm[IN_W-2 -: LOGF_W+1];
    mr   = ((LOGF_W+2)'(m6) + 1'b1) >> 1;
    lg_i = (int'(p) + int'(mr[LOGF_W]) - IN_FRAC) * (1 << LOGF_W)
         + int'(LOG2_TAB[mr[LOGF_W-1:0]]);
    q.sgn = sgn;
    q.nz  = |mag;
    if (lg_i > int'(LG_MAX))      q.lg = LG_MAX;
    else if (lg_i < int'(LG_MIN)) q.lg = LG_MIN;
    else                          q.lg = LG_W'(lg_i);
  end

endmodule
