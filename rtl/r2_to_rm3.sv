// r2_to_rm3: the "R^2 -> R^-3" block of the gravity pipeline.
//
// In the logarithmic format R^-3 = (R^2)^(-3/2) is a multiplication of
// the log by -3/2: lg_out = -floor((3*lg_in + 1) / 2), i.e. -1.5*lg_in
// rounded half up, saturated to the log range. The non-zero flag is
// passed on (R^2 = 0 only happens with eps = 0 and coincident particles,
// where the numerator is zero as well). The result is positive.
//
// Purely combinational. The function is the machine's; doing it as a
// shift-and-add on the log is this design's choice.
module r2_to_rm3
  import progrape1_pkg::*;
(
  input  lns_t r2,
  output lns_t rm3
);

  int t;

  always_comb begin
    t = -((3 * int'($signed(r2.lg)) + 1) >>> 1);
    rm3.sgn = 1'b0;
    rm3.nz  = r2.nz;
    if (t > int'(LG_MAX))      rm3.lg = LG_MAX;
    else if (t < int'(LG_MIN)) rm3.lg = LG_MIN;
    else                       rm3.lg = LG_W'(t);
  end

endmodule
