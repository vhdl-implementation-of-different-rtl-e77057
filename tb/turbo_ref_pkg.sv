// turbo_ref_pkg: software reference models used by the testbenches, written from the
// definitions rather than from the RTL: the RSC encoder from its polynomial recursion, the QPP
// interleaver from its closed formula, a fixed-point Log-MAP SISO and turbo decoder (the
// max* correction computed as round(4 ln(1 + exp(-d/4))) with real arithmetic), and a BPSK/AWGN
// channel with Box-Muller Gaussian noise from a private linear congruential generator, so every
// run draws the same numbers.
package turbo_ref_pkg;

  localparam int MET_NEG = -(1 << 12);
  localparam int CH_MAX  = 31;

  longint unsigned rng_state = 64'h2545F4914F6CDD1D;

  function automatic int unsigned rng32();
    rng_state = rng_state * 64'd6364136223846793005 + 64'd1442695040888963407;
    return int'(rng_state >> 32);
  endfunction

  function automatic real rng_uniform();   // (0, 1)
    return (real'(rng32()) + 0.5) / 4294967296.0;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = rng_uniform();
    u2 = rng_uniform();
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // BPSK (0 -> -1, 1 -> +1) over AWGN, returned as a quantised LLR 4 * 2y/sigma^2.
  function automatic int channel_llr(int bit_in, real sigma);
    real y, l;
    int  q;
    y = (bit_in != 0 ? 1.0 : -1.0) + sigma * gauss();
    l = 4.0 * 2.0 * y / (sigma * sigma);
    q = (l >= 0.0) ? int'($floor(l + 0.5)) : -int'($floor(-l + 0.5));
    if (q > CH_MAX)  q = CH_MAX;
    if (q < -CH_MAX) q = -CH_MAX;
    return q;
  endfunction

  // noise standard deviation for Eb/N0 in dB and code rate r
  function automatic real sigma_for(real ebn0_db, real rate);
    return $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
  endfunction

  function automatic int qpp(int n, int f1, int f2, int k);
    longint v;
    v = (longint'(f1) * k + longint'(f2) * k * k) % n;
    return int'(v);
  endfunction

  // coefficient of D^i in an (m+1)-bit polynomial written MSB = D^0
  function automatic int coef(int poly, int m, int i);
    return (poly >> (m - i)) & 1;
  endfunction

  // RSC encoder by its recursion: w_k = u_k + sum_{i>=1} fb_i w_{k-i}, p_k = sum_{i>=0} ff_i w_{k-i}
  task automatic rsc_encode(input int m, input int fb, input int ff, ref int u[], ref int p[]);
    int w[];
    w = new[u.size()];
    p = new[u.size()];
    for (int k = 0; k < u.size(); k++) begin
      w[k] = u[k];
      for (int i = 1; i <= m; i++) if (k - i >= 0) w[k] ^= coef(fb, m, i) & w[k-i];
      p[k] = 0;
      for (int i = 0; i <= m; i++) if (k - i >= 0) p[k] ^= coef(ff, m, i) & w[k-i];
    end
  endtask

  // trellis of the same code with state bit i-1 = w_{k-i}
  function automatic int tr_w(int m, int fb, int s, int u);
    int w;
    w = u;
    for (int i = 1; i <= m; i++) w ^= coef(fb, m, i) & ((s >> (i - 1)) & 1);
    return w;
  endfunction
  function automatic int tr_next(int m, int fb, int s, int u);
    return ((s << 1) | tr_w(m, fb, s, u)) & ((1 << m) - 1);
  endfunction
  function automatic int tr_par(int m, int fb, int ff, int s, int u);
    int p;
    p = coef(ff, m, 0) & tr_w(m, fb, s, u);
    for (int i = 1; i <= m; i++) p ^= coef(ff, m, i) & ((s >> (i - 1)) & 1);
    return p;
  endfunction

  function automatic int corr(int d);
    return int'($floor(4.0 * $ln(1.0 + $exp(-real'(d) / 4.0)) + 0.5));
  endfunction
  function automatic int mstar(int a, int b);
    int d;
    d = (a > b) ? a - b : b - a;
    return ((a > b) ? a : b) + corr(d);
  endfunction
  function automatic int sat_ext(int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  // Log-MAP SISO: outputs indexed by k (not in sweep order)
  task automatic siso(input int m, input int fb, input int ff,
                      ref int ls[], ref int lp[], ref int la[],
                      ref int llr[], ref int ext[]);
    int n, ns_cnt;
    int alpha[];
    int beta[], bn[];
    int acc[2];
    n      = ls.size();
    ns_cnt = 1 << m;
    alpha  = new[(n + 1) * ns_cnt];
    beta   = new[ns_cnt];
    bn     = new[ns_cnt];
    llr    = new[n];
    ext    = new[n];
    for (int s = 0; s < ns_cnt; s++) alpha[s] = (s == 0) ? 0 : MET_NEG;
    for (int k = 0; k < n; k++) begin
      int an[];
      int have[];
      an   = new[ns_cnt];
      have = new[ns_cnt];
      for (int s = 0; s < ns_cnt; s++) have[s] = 0;
      for (int s = 0; s < ns_cnt; s++)
        for (int u = 0; u < 2; u++) begin
          int nx, v;
          nx = tr_next(m, fb, s, u);
          v  = alpha[k*ns_cnt + s] + u * (ls[k] + la[k]) + tr_par(m, fb, ff, s, u) * lp[k];
          an[nx] = have[nx] ? mstar(an[nx], v) : v;
          have[nx] = 1;
        end
      for (int s = 0; s < ns_cnt; s++) alpha[(k+1)*ns_cnt + s] = an[s] - an[0];
    end
    for (int s = 0; s < ns_cnt; s++) beta[s] = 0;
    for (int k = n - 1; k >= 0; k--) begin
      int hv[2];
      hv = '{0, 0};
      for (int s = 0; s < ns_cnt; s++) begin
        int c[2];
        for (int u = 0; u < 2; u++) begin
          int t;
          c[u] = beta[tr_next(m, fb, s, u)] + u * (ls[k] + la[k]) + tr_par(m, fb, ff, s, u) * lp[k];
          t = alpha[k*ns_cnt + s] + c[u];
          acc[u] = hv[u] ? mstar(acc[u], t) : t;
          hv[u] = 1;
        end
        bn[s] = mstar(c[0], c[1]);
      end
      for (int s = 0; s < ns_cnt; s++) beta[s] = bn[s] - bn[0];
      llr[k] = acc[1] - acc[0];
      ext[k] = sat_ext(llr[k] - ls[k] - la[k]);
    end
  endtask

  // full turbo decoder; lp1/lp2 already depunctured (0 where nothing was received)
  task automatic turbo_decode(input int m, input int fb, input int ff,
                              input int f1, input int f2, input int iters,
                              ref int ls[], ref int lp1[], ref int lp2[], ref int dec[]);
    int n;
    int le1[], le2[], la[], lsi[], lai[], llr[], ext[];
    n   = ls.size();
    le2 = new[n];
    lsi = new[n];
    lai = new[n];
    dec = new[n];
    for (int k = 0; k < n; k++) le2[k] = 0;
    for (int it = 0; it < iters; it++) begin
      la = new[n](le2);
      siso(m, fb, ff, ls, lp1, la, llr, ext);
      le1 = new[n](ext);
      for (int k = 0; k < n; k++) begin
        lsi[k] = ls[qpp(n, f1, f2, k)];
        lai[k] = le1[qpp(n, f1, f2, k)];
      end
      siso(m, fb, ff, lsi, lp2, lai, llr, ext);
      for (int k = 0; k < n; k++) begin
        le2[qpp(n, f1, f2, k)] = ext[k];
        if (it == iters - 1) dec[qpp(n, f1, f2, k)] = (llr[k] > 0) ? 1 : 0;
      end
    end
  endtask

endpackage
