// grav_model_pkg: reference model of the gravity pipeline's arithmetic,
// for the testbenches.
//
// The conversion tables are computed here from their definitions with
// real arithmetic ($ln, $pow) rather than copied from the RTL package,
// so a wrong table entry in the RTL shows up as a mismatch. The rest
// follows the number formats described in progrape1_pkg bit for bit.
// 'real_term' gives the exact floating-point pairwise term for accuracy
// checks.
package grav_model_pkg;
  import progrape1_pkg::*;

  function automatic int log2tab(int k);
    return int'($floor(32.0 * $ln(1.0 + real'(k) / 32.0) / $ln(2.0) + 0.5));
  endfunction

  function automatic int exptab(int k);
    return int'($floor(256.0 * ($pow(2.0, real'(k) / 32.0) - 1.0) + 0.5));
  endfunction

  function automatic logic signed [LG_W-1:0] clamp_lg(longint v);
    longint hi = (longint'(1) <<< (LG_W - 1)) - 1;
    longint lo = -(longint'(1) <<< (LG_W - 1));
    if (v > hi) return LG_W'(hi);
    if (v < lo) return LG_W'(lo);
    return LG_W'(v);
  endfunction

  function automatic lns_t m_f2l(longint unsigned mag, int in_frac, bit sgn);
    lns_t r;
    int p = 0;
    longint unsigned m;
    for (int b = 0; b < 64; b++) if (mag[b]) p = b;
    if (p >= 6) m = (mag >> (p - 6)) & 63;
    else        m = (mag << (6 - p)) & 63;
    m = (m + 1) >> 1;
    if (m == 32) begin
      p++;
      m = 0;
    end
    r.sgn = sgn;
    r.nz  = (mag != 0);
    r.lg  = clamp_lg(longint'(p - in_frac) * 32 + log2tab(int'(m)));
    return r;
  endfunction

  function automatic longint unsigned m_l2f(lns_t a, int out_w, int out_frac);
    int e = int'($signed(a.lg)) >>> 5;
    longint unsigned mm = 256 + exptab(int'($signed(a.lg)) & 31);
    int s = e + out_frac - 8;
    if (!a.nz) return 0;
    if (s > out_w - 9) return (longint'(1) << out_w) - 1;
    if (s >= 0) return mm << s;
    if (s <= -9) return 0;
    return mm >> (-s);
  endfunction

  function automatic lns_t m_r2(lns_t dx, lns_t dy, lns_t dz, lns_t eps2);
    lns_t t[4];
    longint unsigned sum = 0;
    t[0] = dx; t[1] = dy; t[2] = dz; t[3] = eps2;
    for (int k = 0; k < 3; k++) begin
      t[k].lg = clamp_lg(2 * longint'($signed(t[k].lg)));
    end
    for (int k = 0; k < 4; k++) sum += m_l2f(t[k], R2_W, R2_FRAC);
    if (sum >= (longint'(1) << R2_W)) sum = (longint'(1) << R2_W) - 1;
    return m_f2l(sum, R2_FRAC, 1'b0);
  endfunction

  function automatic lns_t m_rm3(lns_t r2);
    lns_t r;
    r.sgn = 0;
    r.nz  = r2.nz;
    r.lg  = clamp_lg(-((3 * longint'($signed(r2.lg)) + 1) >>> 1));
    return r;
  endfunction

  // One pairwise term per axis, as the pipeline computes it.
  function automatic void m_term(input int xj[3], input int xi[3], input lns_t eps2,
                                 output longint f[3]);
    lns_t l[3];
    lns_t r2, rm3, p;
    longint unsigned mg;
    for (int k = 0; k < 3; k++) begin
      longint d = longint'(xj[k]) - longint'(xi[k]);
      l[k] = m_f2l(d < 0 ? -d : d, 0, d < 0);
    end
    r2  = m_r2(l[0], l[1], l[2], eps2);
    rm3 = m_rm3(r2);
    for (int k = 0; k < 3; k++) begin
      p.sgn = l[k].sgn;
      p.nz  = l[k].nz & rm3.nz;
      p.lg  = clamp_lg(longint'($signed(l[k].lg)) + longint'($signed(rm3.lg)));
      mg    = m_l2f(p, FTERM_W, FORCE_FRAC);
      f[k]  = p.sgn ? -longint'(mg) : longint'(mg);
    end
  endfunction

  // Exact term dx / (r^2 + eps^2)^(3/2), scaled by 2^FORCE_FRAC.
  function automatic real real_term(int xj[3], int xi[3], real eps2, int axis);
    real d[3];
    real r2 = eps2;
    for (int k = 0; k < 3; k++) begin
      d[k] = real'(xj[k] - xi[k]);
      r2 += d[k] * d[k];
    end
    if (r2 == 0.0) return 0.0;
    return d[axis] / (r2 * $sqrt(r2)) * $pow(2.0, FORCE_FRAC);
  endfunction

  // Log word for a positive real value (for eps^2 stimulus).
  function automatic lns_t real_to_lns(real v);
    lns_t r;
    r.sgn = 0;
    r.nz  = 1;
    r.lg  = clamp_lg(longint'($floor(32.0 * $ln(v) / $ln(2.0) + 0.5)));
    return r;
  endfunction

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int rand_pos(int bits);
    int v = int'($urandom_range((1 << bits) - 1, 0));
    return v - (1 << (bits - 1));
  endfunction

endpackage
