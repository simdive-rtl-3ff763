// tb_ref_pkg: reference model for the SIMDive testbenches.
//
// Written independently of the RTL: the error coefficients are recomputed
// here from their defining formula with real arithmetic (mean of the exact
// correction over each of the 64 cells), and a lane is modelled with plain
// integer arithmetic (leading one by a scan, anti-log by a multiplication
// with a power of two) instead of the slice-level datapath of the RTL.
package tb_ref_pkg;

  // Exact correction that makes Mitchell's result exact at (x1, x2).
  function automatic real corr(bit div, real x1, real x2);
    if (!div) return (1.0 + x1 + x2 + x1*x2 < 2.0) ? x1*x2 : (1.0-x1)*(1.0-x2)/2.0;
    else      return (x1 >= x2) ? x2*(x2-x1)/(1.0+x2) : (x1-x2)*(1.0-x2)/(1.0+x2);
  endfunction

  // Cell mean, in units of 2^-9, rounded to nearest.
  function automatic int ref_coef8(bit div, int i, int j);
    real s, x1, x2;
    s = 0.0;
    for (int p = 0; p < 64; p++)
      for (int q = 0; q < 64; q++) begin
        x1 = (i + (p + 0.5)/64.0)/8.0;
        x2 = (j + (q + 0.5)/64.0)/8.0;
        s += corr(div, x1, x2);
      end
    s = 512.0 * s / 4096.0;
    return (s >= 0.0) ? $rtoi(s + 0.5) : -$rtoi(-s + 0.5);
  endfunction

  int coef_tab [2][64];
  bit coef_ready = 0;

  function automatic void build_coefs();
    if (coef_ready) return;
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < 64; c++) coef_tab[d][c] = ref_coef8(d[0], c / 8, c % 8);
    coef_ready = 1;
  endfunction

  // Coefficient kept to `bits` LUTs: arithmetic shift of the 8-bit entry.
  function automatic int coef_bits(bit div, int idx, int bits);
    int v;
    v = coef_tab[div][idx];
    return (v >= 0) ? (v >> (8 - bits)) : -((-v + (1 << (8 - bits)) - 1) >> (8 - bits));
  endfunction

  function automatic int msb_pos(longint unsigned v);
    int k;
    k = -1;
    for (int i = 0; i < 64; i++) if (v[i]) k = i;
    return k;
  endfunction

  // Model of one lane: W-bit operands, 2W-bit result.
  function automatic longint unsigned ref_lane(longint unsigned a, longint unsigned b,
                                               int w, bit div, int bits,
                                               output int clamped);
    int k1, k2, idx, c, fl, e, sh;
    longint f1, f2, t, cs, fr;
    longint unsigned full, mant;
    clamped = 0;
    full = (w == 32) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << (2*w)) - 1);
    if (a == 0) return 0;
    if (b == 0) return div ? full : 0;
    k1 = msb_pos(a);
    k2 = msb_pos(b);
    f1 = longint'((a - (64'd1 << k1)) << (w - k1));   // x1 * 2^w
    f2 = longint'((b - (64'd1 << k2)) << (w - k2));
    idx = int'((f1 >> (w - 3)) * 8 + (f2 >> (w - 3)));
    c   = coef_bits(div, idx, bits);
    // coefficient LSB weight 2^-(bits+1); field LSB weight 2^-w
    cs  = (w >= bits + 1) ? (longint'(c) <<< (w - bits - 1)) : (longint'(c) >>> (bits + 1 - w));
    t   = f1 + (div ? -f2 : f2) + cs;
    fl  = int'(t >>> w);
    fr  = t & ((longint'(1) << w) - 1);
    if (fl > 1)  begin clamped = 1; fl = 1;  fr = (longint'(1) << w) - 1; end
    if (fl < -1) begin clamped = 2; fl = -1; fr = 0; end
    e    = (div ? k1 - k2 : k1 + k2) + fl;
    sh   = div ? e + w : e;
    mant = (64'd1 << w) | longint'(fr);
    // (mant << sh) >> w without overflowing 64 bits
    if (sh >= w) return (mant << (sh - w)) & full;
    else         return (mant >> (w - sh)) & full;
  endfunction

endpackage
