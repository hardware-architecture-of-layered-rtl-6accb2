// tb_ref_pkg -- reference arithmetic for the testbenches of the layered
// PLDPC-Hadamard decoder, written independently of the RTL structure.
//
// ref_hadamard decodes one H-CN the slow way: the FHT as 2^r direct inner
// products with Hadamard columns (sign from popcount), ln gamma from that, the
// dual transform as a flat loop over all 2^r positions and r stages (nothing
// pruned), and the max* correction evaluated with real arithmetic
// round(2^f * ln(1 + exp(-x / 2^f))).  Fixed-point rules (truncating shift,
// saturation at every narrowing) are those documented for the RTL.
package tb_ref_pkg;

  function automatic int sat(int v, int w);
    int hi, lo;
    hi = (1 << (w - 1)) - 1;
    lo = -(1 << (w - 1));
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  function automatic int sext(int v, int w);   // w-bit pattern -> signed int
    v = v & ((1 << w) - 1);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  function automatic int corr(int x, int f);
    real s;
    s = real'(1 << f);
    return int'($floor($ln(1.0 + $exp(-real'(x) / s)) * s + 0.5));
  endfunction

  function automatic int ref_maxstar(int a, int b, int w, int f);
    int m, d;
    m = (a > b) ? a : b;
    d = (a > b) ? a - b : b - a;
    return sat(m + corr(d, f), w);
  endfunction

  function automatic int popc(int v);
    int c;
    c = 0;
    for (int i = 0; i < 32; i++) c += (v >> i) & 1;
    return c;
  endfunction

  // SPC position of P-VN j: 0, 1, 2, 4, ..., 2^(r-1), 2^r - 1
  function automatic int spos(int r, int j);
    if (j == 0) return 0;
    if (j <= r) return 1 << (j - 1);
    return (1 << r) - 1;
  endfunction

  // Hadamard input vector: P-VN LLRs at SPC positions, D1H LLRs elsewhere.
  function automatic void build_in(int r, input int lex[8], input int d1h[64],
                                   output int x[64]);
    int q, k;
    bit used[64];
    q = 1 << r;
    for (int i = 0; i < 64; i++) begin x[i] = 0; used[i] = 0; end
    for (int j = 0; j < r + 2; j++) begin x[spos(r, j)] = lex[j]; used[spos(r, j)] = 1; end
    k = 0;
    for (int i = 0; i < q; i++) if (!used[i]) begin x[i] = d1h[k]; k++; end
  endfunction

  // Reference FHT: out[j] = sum_i (-1)^popcount(i&j) x[i]
  function automatic void ref_fht(int r, input int x[64], output int y[64]);
    int q;
    q = 1 << r;
    for (int j = 0; j < 64; j++) y[j] = 0;
    for (int j = 0; j < q; j++)
      for (int i = 0; i < q; i++)
        y[j] += (popc(i & j) % 2) ? -x[i] : x[i];
  endfunction

  // Full (unpruned) dual transform, stage s pairs bit s, bit 0 first.
  function automatic void ref_dfht(int r, int w, int f, input int p[64], input int n[64],
                                   output int sp[64], output int sn[64]);
    int q;
    int cp[64], cn[64], np[64], nn[64];
    q = 1 << r;
    cp = p; cn = n;
    np = p; nn = n;
    for (int s = 0; s < r; s++) begin
      for (int i = 0; i < q; i++) begin
        int lo, hi;
        if (((i >> s) & 1) != 0) continue;
        lo = i; hi = i + (1 << s);
        np[lo] = ref_maxstar(cp[lo], cp[hi], w, f);
        nn[lo] = ref_maxstar(cn[lo], cn[hi], w, f);
        np[hi] = ref_maxstar(cp[lo], cn[hi], w, f);
        nn[hi] = ref_maxstar(cn[lo], cp[hi], w, f);
      end
      cp = np; cn = nn;
    end
    sp = cp; sn = cn;
  endfunction

  // One H-CN: lex[0..r+1] (W_LLR, 3 frac), d1h[0..2^r-r-3] (channel, 3 frac).
  function automatic void ref_hadamard(int r, int w_llr, int w_df, int df_frac,
                                       input int lex[8], input int d1h[64],
                                       output int app[8], output int ex[8]);
    int x[64], y[64], p[64], n[64], sp[64], sn[64];
    build_in(r, lex, d1h, x);
    ref_fht(r, x, y);
    for (int j = 0; j < 64; j++) begin
      int v;
      v = y[j] >>> (3 + 1 - df_frac);
      p[j] = sat(v, w_df);
      n[j] = sat(-v, w_df);
    end
    ref_dfht(r, w_df, df_frac, p, n, sp, sn);
    for (int j = 0; j < 8; j++) begin app[j] = 0; ex[j] = 0; end
    for (int j = 0; j < r + 2; j++) begin
      int a;
      a = sat((sp[spos(r, j)] - sn[spos(r, j)]) * (1 << (3 - df_frac)), w_llr);
      app[j] = a;
      ex[j]  = sat(a - lex[j], w_llr);
    end
  endfunction

endpackage
