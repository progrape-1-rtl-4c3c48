// r2_unit: the "X^2+Y^2+Z^2+eps^2" block of the gravity pipeline.
//
// Takes the three coordinate differences and the softening eps^2, all as
// logarithmic words, and returns R^2 = dx^2 + dy^2 + dz^2 + eps^2 as a
// logarithmic word. A square is a doubling of the log. Sums cannot be
// formed on logs directly, so each of the four terms is converted to a
// R2_W-bit fixed-point number with R2_FRAC fraction bits (lns_l2f), the
// four are added with saturation, and the sum is converted back
// (lns_f2l). The sign of each difference is irrelevant and ignored.
//
// Purely combinational. The block's function is the machine's; the
// route through fixed point is this design's choice.
module r2_unit
  import progrape1_pkg::*;
(
  input  lns_t dx,
  input  lns_t dy,
  input  lns_t dz,
  input  lns_t eps2,
  output lns_t r2
);

  lns_t term [4];
  logic [R2_W-1:0] lin [4];
  logic [3:0] unused_sgn;
  logic [R2_W+1:0] sum;
  logic [R2_W-1:0] sum_sat;

  function automatic lns_t square(lns_t a);
    lns_t r;
    int   l2;
    l2    = 2 * int'($signed(a.lg));
    r.sgn = 1'b0;
    r.nz  = a.nz;
    if (l2 > int'(LG_MAX))      r.lg = LG_MAX;
    else if (l2 < int'(LG_MIN)) r.lg = LG_MIN;
    else                        r.lg = LG_W'(l2);
    return r;
  endfunction

  always_comb begin
    term[0] = square(dx);
    term[1] = square(dy);
    term[2] = square(dz);
    term[3] = eps2;
  end

  for (genvar k = 0; k < 4; k++) begin : g_lin
    lns_l2f #(.OUT_W(R2_W), .OUT_FRAC(R2_FRAC)) u_l2f (
      .a(term[k]), .mag(lin[k]), .sgn(unused_sgn[k]));
  end

  always_comb begin
    sum     = (R2_W+2)'(lin[0]) + (R2_W+2)'(lin[1]) + (R2_W+2)'(lin[2]) + (R2_W+2)'(lin[3]);
    sum_sat = (|sum[R2_W+1:R2_W]) ? '1 : sum[R2_W-1:0];
  end

  lns_f2l #(.IN_W(R2_W), .IN_FRAC(R2_FRAC)) u_f2l (
    .mag(sum_sat), .sgn(1'b0), .q(r2));

endmodule
