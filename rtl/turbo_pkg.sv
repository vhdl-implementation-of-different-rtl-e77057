// turbo_pkg: types, widths and trellis arithmetic shared by the turbo encoder and the Log-MAP
// turbo decoder.
//
// Generator polynomials are given the way the configurations are named, in octal with the
// most significant of the M+1 bits being the coefficient of D^0: configuration (15, 12, 0) is
// feedback 'o15 = 1101 = 1 + D + D^3 and feed-forward 'o12 = 1010 = 1 + D^2, M = 3 memory
// elements. The first number is the feedback polynomial, the second the parity polynomial.
// An encoder state holds the last M feedback-register values, bit 0 the most recent.
//
// Soft values are log-likelihood ratios L = ln(P(bit=1)/P(bit=0)) in two's complement with
// FRAC_BITS fractional bits (LSB = 0.25). The Log-MAP max* operator is
// max*(a,b) = max(a,b) + ln(1 + exp(-|a-b|)), the correction taken from a 4-entry rounding of
// that curve (see max_star_corr). The word widths are this design's choice; the paper gives none.
package turbo_pkg;

  localparam int FRAC_BITS = 2;   // LLR LSB = 2^-FRAC_BITS
  localparam int W_CH      = 6;   // channel LLR width (received r0, r1, r2)
  localparam int W_EXT     = 8;   // extrinsic LLR width
  localparam int W_MET     = 16;  // path metric / a-posteriori LLR width
  localparam int MAX_M     = 7;   // largest supported number of memory elements

  typedef logic signed [W_CH-1:0]  ch_llr_t;
  typedef logic signed [W_EXT-1:0] ext_llr_t;
  typedef logic signed [W_MET-1:0] metric_t;

  // Metric given to unreachable states at the start of the trellis.
  localparam metric_t MET_NEG = metric_t'(-(1 <<< (W_MET - 4)));

  // One trellis step of an RSC encoder: feedback bit w = u ^ sum fb_i s_{i-1}, i = 1..m.
  function automatic logic rsc_w(int m, logic [MAX_M:0] fb, logic [MAX_M-1:0] s, logic u);
    logic w;
    w = u;
    for (int i = 1; i <= m; i++) w ^= fb[m-i] & s[i-1];
    return w;
  endfunction

  // Parity output p = ff_0 w ^ sum ff_i s_{i-1}, i = 1..m.
  function automatic logic rsc_parity(int m, logic [MAX_M:0] fb, logic [MAX_M:0] ff,
                                      logic [MAX_M-1:0] s, logic u);
    logic p;
    p = ff[m] & rsc_w(m, fb, s, u);
    for (int i = 1; i <= m; i++) p ^= ff[m-i] & s[i-1];
    return p;
  endfunction

  // Next state: the register shifts by one, the new feedback bit entering at bit 0.
  function automatic logic [MAX_M-1:0] rsc_next(int m, logic [MAX_M:0] fb,
                                                logic [MAX_M-1:0] s, logic u);
    logic [MAX_M-1:0] n;
    n = {s[MAX_M-2:0], rsc_w(m, fb, s, u)};
    for (int i = m; i < MAX_M; i++) n[i] = 1'b0;
    return n;
  endfunction

  // ln(1 + exp(-d)) in LLR LSBs, d = |a-b| in LSBs: round(4 ln(1 + exp(-d/4))).
  function automatic metric_t max_star_corr(metric_t d);
    if (d == 0)      return metric_t'(3);
    else if (d <= 3) return metric_t'(2);
    else if (d <= 8) return metric_t'(1);
    else             return metric_t'(0);
  endfunction

  function automatic metric_t max_star(metric_t a, metric_t b);
    metric_t d;
    d = (a > b) ? a - b : b - a;
    return ((a > b) ? a : b) + max_star_corr(d);
  endfunction

  function automatic ext_llr_t sat_ext(metric_t v);
    if (v > metric_t'(2 ** (W_EXT - 1) - 1))  return ext_llr_t'(2 ** (W_EXT - 1) - 1);
    if (v < metric_t'(-(2 ** (W_EXT - 1))))   return ext_llr_t'(-(2 ** (W_EXT - 1)));
    return ext_llr_t'(v);
  endfunction

endpackage
