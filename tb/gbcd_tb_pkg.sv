// gbcd_tb_pkg -- shared testbench helpers: check counters, unit-energy QAM
// constants, and the construction of PLM tables (BOX, piecewise-linear PME,
// per-bit max-log LLR) from their defining formulas, plus a plain reference
// evaluation of a PLM table.
package gbcd_tb_pkg;
  import gbcd_pkg::*;

  int checks   = 0;
  int failures = 0;

  function automatic void chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 20) $display("FAIL: %s", msg);
    end
  endfunction

  function automatic void report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  typedef plm_ent_t tab_t [NBIN];

  // PAM size per dimension and the half-spacing d of the unit-energy QAM:
  // points (2i - (M-1)) d, i = 0..M-1, with d = sqrt(3 / (2 (Q - 1)))
  function automatic int pam_m(int qam);
    return 2 << qam;
  endfunction
  function automatic real pam_d(int qam);
    int m;
    m = pam_m(qam);
    return $sqrt(3.0 / (2.0 * (m * m - 1)));
  endfunction
  function automatic real pam_pt(int qam, int i);
    return (2 * i - (pam_m(qam) - 1)) * pam_d(qam);
  endfunction
  // Gray label bit b (b = 0 is the most significant bit) of PAM point i
  function automatic int gray_bit(int qam, int i, int b);
    int g, nb;
    nb = qam + 1;
    g  = i ^ (i >> 1);
    return (g >> (nb - 1 - b)) & 1;
  endfunction

  function automatic int rnd(real x);
    return (x >= 0.0) ? int'($floor(x + 0.5)) : -int'($floor(-x + 0.5));
  endfunction
  function automatic logic signed [PW-1:0] q16(real x, int frac);
    int v;
    v = rnd(x * (2.0 ** frac));
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return PW'(v);
  endfunction

  function automatic tab_t empty_tab();
    tab_t t;
    for (int i = 0; i < int'(NBIN); i++) t[i] = '{bnd: 16'sh7fff, slope: '0, bias: '0};
    return t;
  endfunction

  // BOX denoiser: clip each real dimension to [-(M-1)d, (M-1)d]
  function automatic tab_t box_tab(int qam);
    tab_t t;
    real amax;
    t    = empty_tab();
    amax = (pam_m(qam) - 1) * pam_d(qam);
    t[0] = '{bnd: 16'sh8000, slope: '0, bias: q16(-amax, Z_FRAC)};
    t[1] = '{bnd: q16(-amax, Z_FRAC), slope: q16(1.0, SLOPE_FRAC), bias: '0};
    t[2] = '{bnd: q16(amax, Z_FRAC), slope: '0, bias: q16(amax, Z_FRAC)};
    return t;
  endfunction

  // piecewise-linear PME: sum_{k=-g}^{g} f(rho (x + 2 beta k)), f = clip to
  // [-1, 1], scaled by d; ramps of half-width 1/rho centred on 2 beta j
  function automatic tab_t pme_tab(int qam, real rho, real beta);
    tab_t t;
    int m, g, n;
    real d, c;
    t = empty_tab();
    m = pam_m(qam); g = m / 2 - 1; d = pam_d(qam);
    t[0] = '{bnd: 16'sh8000, slope: '0, bias: q16(-(2 * g + 1) * d, Z_FRAC)};
    n = 1;
    for (int j = 0; j <= 2 * g; j++) begin
      c = 2.0 * beta * (j - g);
      t[n] = '{bnd: q16(c - 1.0 / rho, Z_FRAC), slope: q16(rho * d, SLOPE_FRAC),
               bias: q16(d * (2 * j - 2 * g - rho * c), Z_FRAC)};
      n++;
      t[n] = '{bnd: q16(c + 1.0 / rho, Z_FRAC), slope: '0,
               bias: q16(d * (2 * j - 2 * g + 1), Z_FRAC)};
      n++;
    end
    return t;
  endfunction

  // exact real-valued h_b(t) = min_{bit b = 0} (t-a)^2 - min_{bit b = 1} (t-a)^2
  function automatic real h_exact(int qam, int b, real x);
    real m0, m1, e;
    m0 = 1.0e9; m1 = 1.0e9;
    for (int i = 0; i < pam_m(qam); i++) begin
      e = (x - pam_pt(qam, i)) ** 2;
      if (gray_bit(qam, i, b) == 0) begin if (e < m0) m0 = e; end
      else if (e < m1) m1 = e;
    end
    return m0 - m1;
  endfunction

  // per-bit LLR table: breakpoints at the midpoints of consecutive points of
  // each bit set; h is linear between them
  function automatic tab_t llr_tab(int qam, int b);
    tab_t t;
    real bp [$];
    real lo, hi, x0, x1, s, c;
    int  prev0, prev1;
    t = empty_tab();
    prev0 = -1; prev1 = -1;
    for (int i = 0; i < pam_m(qam); i++) begin
      if (gray_bit(qam, i, b) == 0) begin
        if (prev0 >= 0) bp.push_back((pam_pt(qam, prev0) + pam_pt(qam, i)) / 2.0);
        prev0 = i;
      end else begin
        if (prev1 >= 0) bp.push_back((pam_pt(qam, prev1) + pam_pt(qam, i)) / 2.0);
        prev1 = i;
      end
    end
    bp.sort();
    for (int n = 0; n <= bp.size(); n++) begin
      lo = (n == 0) ? -100.0 : bp[n-1];
      hi = (n == bp.size()) ? 100.0 : bp[n];
      x0 = (n == 0) ? hi - 0.01 : lo + 0.25 * (hi - lo);
      x1 = (n == bp.size()) ? lo + 0.02 : lo + 0.75 * (hi - lo);
      if (n == 0) x1 = hi - 0.02;
      s = (h_exact(qam, b, x1) - h_exact(qam, b, x0)) / (x1 - x0);
      c = h_exact(qam, b, x0) - s * x0;
      t[n] = '{bnd: (n == 0) ? 16'sh8000 : q16(lo, 8), slope: q16(s, SLOPE_FRAC), bias: q16(c, 12)};
    end
    return t;
  endfunction

  // reference evaluation of a table, written independently of the RTL:
  // last bin whose boundary is <= x, then slope*x >> sh + bias, saturated
  function automatic longint plm_ref(tab_t t, longint x, int sh, int ow);
    int bin;
    longint y, hi, lo;
    bin = 0;
    for (int k = 1; k < int'(NBIN); k++) if (x >= longint'(t[k].bnd)) bin = k;
    y  = ((x * longint'(t[bin].slope)) >>> sh) + longint'(t[bin].bias);
    hi = (longint'(1) << (ow - 1)) - 1;
    lo = -(longint'(1) << (ow - 1));
    return (y > hi) ? hi : (y < lo) ? lo : y;
  endfunction
endpackage
