// siso_logmap: soft-in soft-out decoder of one RSC code with the Log-MAP (log-domain BCJR)
// algorithm, the constituent decoder of the turbo decoder.
//
// For each bit k it takes three soft values: the channel LLR of the systematic bit (Ls), the
// channel LLR of the parity bit (Lp) and the a-priori LLR from the other decoder (La), all
// LLR = ln(P(1)/P(0)). The branch metric of a trellis branch with input u and parity p is
// gamma = u (Ls + La) + p Lp. The block is processed in two sweeps:
//   forward  k = 0..N-1: alpha_{k+1}(s') = max*_{s->s'} (alpha_k(s) + gamma_k), alpha_k stored;
//   backward k = N-1..0: L_k = max*_{u=1}(alpha_k + gamma_k + beta_{k+1})
//                            - max*_{u=0}(alpha_k + gamma_k + beta_{k+1}),
//                        beta_k(s) = max*_{s->s'} (beta_{k+1}(s') + gamma_k).
// max*(a,b) = max(a,b) + ln(1+e^-|a-b|) (turbo_pkg). The trellis starts in state 0 and ends
// open (beta_N uniform) because the encoder sends no tail. After each step the metrics are
// normalised by subtracting the metric of state 0. The output is the a-posteriori LLR L_k and the
// extrinsic LLR Le_k = L_k - Ls - La, saturated to W_EXT bits, which goes to the other decoder.
// The two-sweep schedule, the fixed-point widths and the normalisation are this design's
// choices; the paper names the algorithm and the decoder's inputs and outputs only.
//
// Interface and timing: samples arrive with `in_valid`; `in_bwd` says which sweep the sample
// belongs to. A block is exactly N forward samples in order k = 0..N-1 followed by N backward
// samples in order k = N-1..0, with at least one idle cycle between the sweeps (the alpha memory
// is read one cycle ahead). Within a sweep one sample may arrive every cycle. For each backward
// sample, `out_valid` with `out_llr` and `out_ext` follows one cycle later.
module siso_logmap
  import turbo_pkg::*;
#(
  parameter int             N  = 1000,
  parameter int             M  = 3,
  parameter logic [MAX_M:0] FB = 'o15,
  parameter logic [MAX_M:0] FF = 'o12
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     in_bwd,
  input  ch_llr_t  in_sys,
  input  ch_llr_t  in_par,
  input  ext_llr_t in_apr,
  output logic     out_valid,
  output metric_t  out_llr,
  output ext_llr_t out_ext
);

  localparam int S  = 1 << M;
  localparam int AW = $clog2(N);

  metric_t alpha [S];         // alpha_k for the next forward sample
  metric_t beta  [S];         // beta_{k+1} for the next backward sample
  metric_t alpha_rd [S];      // alpha_k read back for the next backward sample
  metric_t alpha_nx [S], beta_nx [S];
  metric_t g_u, g_p;          // Ls + La and Lp
  metric_t llr;
  metric_t ext_full;

  logic [S*W_MET-1:0] alpha_mem [N];
  logic [S*W_MET-1:0] alpha_wr, alpha_q;
  logic [AW-1:0]      fcnt, bptr, bptr_nx;

  logic fwd_go, bwd_go;
  assign fwd_go = in_valid && !in_bwd;
  assign bwd_go = in_valid &&  in_bwd;

  function automatic metric_t gam(logic u, logic p, metric_t gu, metric_t gp);
    return (u ? gu : metric_t'(0)) + (p ? gp : metric_t'(0));
  endfunction

  always_comb begin
    g_u = metric_t'(in_sys) + metric_t'(in_apr);
    g_p = metric_t'(in_par);
  end

  // forward recursion: state ns has predecessors {j, ns >> 1}, j = 0, 1
  always_comb begin
    metric_t c [2];
    metric_t raw [S];
    for (int ns = 0; ns < S; ns++) begin
      for (int j = 0; j < 2; j++) begin
        int   s;
        logic u, p;
        s = (j << (M - 1)) | (ns >> 1);
        u = logic'(ns & 1) ^ rsc_w(M, FB, MAX_M'(s), 1'b0);
        p = rsc_parity(M, FB, FF, MAX_M'(s), u);
        c[j] = alpha[s] + gam(u, p, g_u, g_p);
      end
      raw[ns] = max_star(c[0], c[1]);
    end
    for (int ns = 0; ns < S; ns++) alpha_nx[ns] = raw[ns] - raw[0];
  end

  // backward recursion and a-posteriori LLR
  always_comb begin
    metric_t c [2];
    metric_t raw [S];
    metric_t acc [2];
    logic    have [2];
    have = '{1'b0, 1'b0};
    acc  = '{metric_t'(0), metric_t'(0)};
    for (int s = 0; s < S; s++) begin
      for (int u = 0; u < 2; u++) begin
        int   ns;
        logic p;
        metric_t t;
        ns = int'(rsc_next(M, FB, MAX_M'(s), logic'(u)));
        p  = rsc_parity(M, FB, FF, MAX_M'(s), logic'(u));
        c[u] = beta[ns] + gam(logic'(u), p, g_u, g_p);
        t = alpha_rd[s] + c[u];
        acc[u]  = have[u] ? max_star(acc[u], t) : t;
        have[u] = 1'b1;
      end
      raw[s] = max_star(c[0], c[1]);
    end
    for (int s = 0; s < S; s++) beta_nx[s] = raw[s] - raw[0];
    llr      = acc[1] - acc[0];
    ext_full = llr - g_u;
  end

  // packing of the alpha vector for the memory
  always_comb begin
    for (int s = 0; s < S; s++) begin
      alpha_wr[s*W_MET +: W_MET] = alpha[s];
      alpha_rd[s] = alpha_q[s*W_MET +: W_MET];
    end
  end

  assign bptr_nx = bwd_go ? bptr - 1'b1 : bptr;

  always_ff @(posedge clk) begin
    if (fwd_go) alpha_mem[fcnt] <= alpha_wr;
    alpha_q <= alpha_mem[bptr_nx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt      <= '0;
      bptr      <= AW'(N - 1);
      out_valid <= 1'b0;
      out_llr   <= '0;
      out_ext   <= '0;
      for (int s = 0; s < S; s++) begin
        alpha[s] <= (s == 0) ? metric_t'(0) : MET_NEG;
        beta[s]  <= '0;
      end
    end else begin
      out_valid <= bwd_go;
      if (fwd_go) begin
        if (fcnt == AW'(N - 1)) begin
          // block fully swept forwards: prepare the backward sweep and the next block
          fcnt <= '0;
          bptr <= AW'(N - 1);
          for (int s = 0; s < S; s++) begin
            alpha[s] <= (s == 0) ? metric_t'(0) : MET_NEG;
            beta[s]  <= '0;
          end
        end else begin
          fcnt  <= fcnt + 1'b1;
          alpha <= alpha_nx;
        end
      end
      if (bwd_go) begin
        bptr    <= bptr_nx;
        beta    <= beta_nx;
        out_llr <= llr;
        out_ext <= sat_ext(ext_full);
      end
    end
  end

  // handshake rule: the backward sweep never starts in the cycle after a forward sample
  assert property (@(posedge clk) disable iff (!rst_n) fwd_go |=> !bwd_go)
    else $error("siso_logmap: no idle cycle between forward and backward sweep");

  initial assert (M >= 1 && M <= MAX_M && N >= 2) else $fatal(1, "siso_logmap: bad parameters");

endmodule
