// gravity_ifp: interaction function pipeline (IFP) for gravity.
//
// Evaluates one pairwise term of f_i = sum_j (x_j - x_i) / (|x_j - x_i|^2
// + eps^2)^(3/2) per clock, following the machine's block diagram:
// three subtractors, F->L conversion, the R^2 unit, R^2 -> R^-3, "wait"
// delays for the differences, three log-domain multipliers (adders of
// logs) and L->F conversion. Mass is not handled (unit mass), as in the
// machine's gravity pipeline; neither is the potential.
//
// Stages (one register each):
//   1  dx = xj - xi, dy, dz            (21-bit fixed point)
//   2  F->L of dx, dy, dz              (log words)
//   3  R^2 = dx^2 + dy^2 + dz^2 + eps^2
//   4  R^-3
//   5  dx * R^-3 etc. (log add), dx delayed two stages ("wait")
//   6  L->F                            (35-bit signed, 32 fraction bits)
// 'runr' is 'run' delayed by LAT = 6 clocks and marks valid 'fdata'.
//
// JDATA layout (this design's choice): bits [19:0] xj, [51:32] yj,
// [83:64] zj; bits 96..127 are not used by this pipeline.
module gravity_ifp
  import progrape1_pkg::*;
(
  input  logic               clk,
  input  logic               run,
  input  logic [JDATA_W-1:0] jdata,
  input  ipart_t             idata,
  output logic               runr,
  output fterm_t             fdata
);

  localparam int unsigned LAT = 6;

  // ---- stage 1: subtract ----
  logic signed [DX_W-1:0] d1 [3];
  lns_t eps1, eps2q;
  logic signed [POS_W-1:0] xj [3];
  logic signed [POS_W-1:0] xi [3];

  always_comb begin
    xj[0] = jdata[0  +: POS_W];
    xj[1] = jdata[32 +: POS_W];
    xj[2] = jdata[64 +: POS_W];
    xi[0] = idata.x;
    xi[1] = idata.y;
    xi[2] = idata.z;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++)
      d1[k] <= DX_W'(xj[k]) - DX_W'(xi[k]);
    eps1 <= idata.eps2;
  end

  // ---- stage 2: F->L ----
  lns_t l2c [3];
  lns_t l2 [3];
  for (genvar k = 0; k < 3; k++) begin : g_f2l
    logic [DX_W-1:0] mag;
    assign mag = d1[k][DX_W-1] ? DX_W'(-d1[k]) : DX_W'(d1[k]);
    lns_f2l #(.IN_W(DX_W), .IN_FRAC(0)) u_f2l (
      .mag(mag), .sgn(d1[k][DX_W-1]), .q(l2c[k]));
  end

  always_ff @(posedge clk) begin
    l2    <= l2c;
    eps2q <= eps1;
  end

  // ---- stage 3: R^2 ----
  lns_t r2c, r2q;
  r2_unit u_r2 (.dx(l2[0]), .dy(l2[1]), .dz(l2[2]), .eps2(eps2q), .r2(r2c));
  always_ff @(posedge clk) r2q <= r2c;

  // ---- stage 4: R^-3 ----
  lns_t rm3c, rm3q;
  r2_to_rm3 u_rm3 (.r2(r2q), .rm3(rm3c));
  always_ff @(posedge clk) rm3q <= rm3c;

  // ---- "wait": the differences wait two stages for R^-3 ----
  lns_t lw [3];
  for (genvar k = 0; k < 3; k++) begin : g_wait
    delay_line #(.W(LNS_W), .DEPTH(2)) u_wait (.clk(clk), .d(l2[k]), .q(lw[k]));
  end

  // ---- stage 5: multiply (add logs) ----
  lns_t p5 [3];
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      automatic int s = int'($signed(lw[k].lg)) + int'($signed(rm3q.lg));
      p5[k].sgn <= lw[k].sgn;
      p5[k].nz  <= lw[k].nz & rm3q.nz;
      if (s > int'(LG_MAX))      p5[k].lg <= LG_MAX;
      else if (s < int'(LG_MIN)) p5[k].lg <= LG_MIN;
      else                       p5[k].lg <= LG_W'(s);
    end
  end

  // ---- stage 6: L->F ----
  logic [FTERM_W-1:0] fm [3];
  logic [2:0] fs;
  for (genvar k = 0; k < 3; k++) begin : g_l2f
    lns_l2f #(.OUT_W(FTERM_W), .OUT_FRAC(FORCE_FRAC)) u_l2f (
      .a(p5[k]), .mag(fm[k]), .sgn(fs[k]));
  end

  function automatic logic signed [FTERM_W:0] signed_term(logic [FTERM_W-1:0] m, logic s);
    return s ? -$signed({1'b0, m}) : $signed({1'b0, m});
  endfunction

  always_ff @(posedge clk) begin
    fdata.fx <= signed_term(fm[0], fs[0]);
    fdata.fy <= signed_term(fm[1], fs[1]);
    fdata.fz <= signed_term(fm[2], fs[2]);
  end

  delay_line #(.W(1), .DEPTH(LAT)) u_run (.clk(clk), .d(run), .q(runr));

endmodule
