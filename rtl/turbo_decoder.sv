// turbo_decoder: iterative Log-MAP turbo decoder for the code of turbo_encoder.
//
// The received block is stored as channel LLRs r0 (systematic), r1 (parity 1) and r2
// (parity 2). In rate-1/2 mode only one parity stream is received, carrying par_1 at even and
// par_2 at odd bit positions; it is depunctured on the way in, the missing parity LLRs being 0
// (no information). Decoding then alternates between the two SISO decoders of the paper's
// Fig. 5, one half-iteration each:
//   SISO 1 reads r0[k], r1[k] and the deinterleaved extrinsic of SISO 2, Le2[k] (0 in the
//          first iteration), and writes its extrinsic Le1[k];
//   SISO 2 reads r0[pi(k)], r2[k] and the interleaved extrinsic Le1[pi(k)], and writes its
//          extrinsic to Le2[pi(k)], which is the deinterleaver.
// Interleaving and deinterleaving are thus addressing of the extrinsic memories by the
// interleaver's pi(k), which walks forwards and backwards with the two sweeps of each SISO.
// In the last iteration SISO 2's a-posteriori LLR gives the hard decision for bit pi(k)
// (bit = 1 when the LLR is positive), and the decided block is streamed out in natural order.
// The number of iterations is a run-time input; the paper settles on 6.
//
// Interface: while `in_ready` is high, one received bit position is accepted per `in_valid`
// (in_sys, in_p1, in_p2; in rate-1/2 mode the single parity stream on in_p1). `rate_half` must
// be steady while a block loads; `num_iter` (1..15) is taken when the last position arrives.
// The decoded bits then come out on `out_bit`/`out_valid`, `out_last` marking bit N-1.
// `iter_done` pulses at the end of each full iteration.
// Timing: each half-iteration takes 2N + 3 cycles (forward sweep, gap, backward sweep, drain),
// so a block takes N (load) + num_iter (4N + 6) + N + 2 cycles.
module turbo_decoder
  import turbo_pkg::*;
#(
  parameter int             N  = 1000,
  parameter int             M  = 3,
  parameter logic [MAX_M:0] FB = 'o15,
  parameter logic [MAX_M:0] FF = 'o12,
  parameter int             F1 = 31,
  parameter int             F2 = 90
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rate_half,
  input  logic [3:0] num_iter,
  // received channel LLRs
  input  logic       in_valid,
  input  ch_llr_t    in_sys,
  input  ch_llr_t    in_p1,
  input  ch_llr_t    in_p2,
  output logic       in_ready,
  // decoded bits
  output logic       out_valid,
  output logic       out_bit,
  output logic       out_last,
  output logic       iter_done
);

  localparam int AW = $clog2(N);

  typedef enum logic [2:0] {S_LOAD, S_FWD, S_GAP1, S_BWD, S_GAP2, S_OUT} state_t;
  state_t state;

  ch_llr_t  r0_mem [N];
  ch_llr_t  r1_mem [N];
  ch_llr_t  r2_mem [N];
  ext_llr_t le1_mem [N];
  ext_llr_t le2_mem [N];
  logic     dec_mem [N];

  logic [AW-1:0] cnt;
  logic [3:0]    iter, iter_lim;
  logic          half;              // 0: SISO 1, 1: SISO 2

  logic [AW-1:0] il_k, il_pi;
  logic          il_restart, il_up, il_dn;

  // read stage
  logic          issue, issue_bwd;
  logic          rd_valid, rd_bwd, rd_half, rd_first;
  ch_llr_t       sys_q, par_q;
  ext_llr_t      apr_q;
  logic [AW-1:0] k_d1, k_d2, pi_d1, pi_d2;
  logic          wb_last_iter;

  // SISO outputs
  logic     s1_ov, s2_ov;
  metric_t  s1_llr, s2_llr;
  ext_llr_t s1_ext, s2_ext;

  assign in_ready   = (state == S_LOAD);
  assign issue      = (state == S_FWD) || (state == S_BWD);
  assign issue_bwd  = (state == S_BWD);
  assign il_up      = (state == S_FWD);
  assign il_dn      = (state == S_BWD);
  assign il_restart = (state == S_LOAD);

  qpp_interleaver #(.N(N), .F1(F1), .F2(F2)) u_il (
    .clk, .rst_n, .restart(il_restart), .step_up(il_up), .step_down(il_dn),
    .k(il_k), .pi(il_pi)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      cnt       <= '0;
      iter      <= '0;
      iter_lim  <= 4'd1;
      half      <= 1'b0;
      iter_done <= 1'b0;
    end else begin
      iter_done <= 1'b0;
      case (state)
        S_LOAD:
          if (in_valid) begin
            if (cnt == AW'(N - 1)) begin
              cnt      <= '0;
              iter     <= '0;
              half     <= 1'b0;
              iter_lim <= (num_iter == 4'd0) ? 4'd1 : num_iter;
              state    <= S_FWD;
            end else begin
              cnt <= cnt + 1'b1;
            end
          end
        S_FWD:  if (il_k == AW'(N - 1)) state <= S_GAP1;
        S_GAP1: state <= S_BWD;
        S_BWD:  if (il_k == '0) begin
                  state <= S_GAP2;
                  cnt   <= '0;
                end
        S_GAP2: begin
          if (cnt == AW'(1)) begin
            cnt <= '0;
            if (!half) begin
              half  <= 1'b1;
              state <= S_FWD;
            end else begin
              half      <= 1'b0;
              iter_done <= 1'b1;
              if (iter == iter_lim - 1'b1) state <= S_OUT;
              else begin
                iter  <= iter + 1'b1;
                state <= S_FWD;
              end
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_OUT:
          if (cnt == AW'(N - 1)) begin
            cnt   <= '0;
            state <= S_LOAD;
          end else begin
            cnt <= cnt + 1'b1;
          end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ---------------------------------------------------------------- load with depuncturing
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      r0_mem[cnt] <= in_sys;
      if (rate_half) begin
        r1_mem[cnt] <= cnt[0] ? ch_llr_t'(0) : in_p1;
        r2_mem[cnt] <= cnt[0] ? in_p1 : ch_llr_t'(0);
      end else begin
        r1_mem[cnt] <= in_p1;
        r2_mem[cnt] <= in_p2;
      end
    end
  end

  // ---------------------------------------------------------------- read stage
  always_ff @(posedge clk) begin
    sys_q <= r0_mem[half ? il_pi : il_k];
    par_q <= half ? r2_mem[il_k] : r1_mem[il_k];
    apr_q <= half ? le1_mem[il_pi] : le2_mem[il_k];
    k_d1  <= il_k;
    pi_d1 <= il_pi;
    k_d2  <= k_d1;
    pi_d2 <= pi_d1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid     <= 1'b0;
      rd_bwd       <= 1'b0;
      rd_half      <= 1'b0;
      rd_first     <= 1'b0;
      wb_last_iter <= 1'b0;
    end else begin
      rd_valid     <= issue;
      rd_bwd       <= issue_bwd;
      rd_half      <= half;
      rd_first     <= (iter == '0) && !half;
      wb_last_iter <= (iter == iter_lim - 1'b1);
    end
  end

  // ---------------------------------------------------------------- the two SISO decoders
  ext_llr_t apr_in;
  assign apr_in = rd_first ? ext_llr_t'(0) : apr_q;

  siso_logmap #(.N(N), .M(M), .FB(FB), .FF(FF)) u_siso1 (
    .clk, .rst_n,
    .in_valid(rd_valid && !rd_half), .in_bwd(rd_bwd),
    .in_sys(sys_q), .in_par(par_q), .in_apr(apr_in),
    .out_valid(s1_ov), .out_llr(s1_llr), .out_ext(s1_ext)
  );

  siso_logmap #(.N(N), .M(M), .FB(FB), .FF(FF)) u_siso2 (
    .clk, .rst_n,
    .in_valid(rd_valid && rd_half), .in_bwd(rd_bwd),
    .in_sys(sys_q), .in_par(par_q), .in_apr(apr_in),
    .out_valid(s2_ov), .out_llr(s2_llr), .out_ext(s2_ext)
  );

  // ---------------------------------------------------------------- write back
  always_ff @(posedge clk) begin
    if (s1_ov) le1_mem[k_d2] <= s1_ext;
    if (s2_ov) begin
      le2_mem[pi_d2] <= s2_ext;                   // deinterleave
      if (wb_last_iter) dec_mem[pi_d2] <= (s2_llr > 0);
    end
  end

  // ---------------------------------------------------------------- output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_bit   <= 1'b0;
    end else begin
      out_valid <= (state == S_OUT);
      out_last  <= (state == S_OUT) && (cnt == AW'(N - 1));
      out_bit   <= dec_mem[cnt];
    end
  end

  // the two decoders never work at the same time
  assert property (@(posedge clk) disable iff (!rst_n) !(s1_ov && s2_ov));

endmodule
