// tb_ber_workloads: runs, one block per point, the bit-error-rate experiments the design was
// evaluated with: configurations (7, 5), (15, 12, 0) and (71, 52, 0) at block length 1000,
// (15, 12, 0) and (71, 52, 0) at block length 5000, rate 1/3 and rate 1/2, 6 iterations
// (8 for (7, 5)), at Eb/N0 of 0.5, 1.0 and 1.5 dB. Each point is a complete encode - channel -
// decode pass through a turbo_codec instance; the decoded block must equal the software turbo
// decoder bit for bit, and the measured bit errors are printed. One block per point gives only a
// coarse error rate; rerun with more blocks for curves.
module tb_ber_workloads;
  import turbo_pkg::*;
  import turbo_ref_pkg::*;

  localparam int NI = 5;
  localparam int CFG_N  [NI] = '{1000, 1000, 1000, 5000, 5000};
  localparam int CFG_M  [NI] = '{2, 3, 5, 3, 5};
  localparam int CFG_FB [NI] = '{'o7, 'o15, 'o71, 'o15, 'o71};
  localparam int CFG_FF [NI] = '{'o5, 'o12, 'o52, 'o12, 'o52};

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       e_iv [NI], e_ib [NI], e_ir [NI], e_ov [NI], e_ol [NI], e_s [NI], e_p1 [NI], e_p2 [NI], e_p [NI];
  logic       d_iv [NI], d_ir [NI], d_ov [NI], d_ob [NI], d_ol [NI], d_it [NI];
  ch_llr_t    d_s [NI], d_p1 [NI], d_p2 [NI];
  logic       rate_half;
  logic [3:0] num_iter;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NI; i++) begin : g_codec
    turbo_codec #(.N(CFG_N[i]), .M(CFG_M[i]), .FB(CFG_FB[i]), .FF(CFG_FF[i]), .F1(31), .F2(90)) u (
      .clk, .rst_n,
      .enc_in_valid(e_iv[i]), .enc_in_bit(e_ib[i]), .enc_in_ready(e_ir[i]),
      .enc_out_valid(e_ov[i]), .enc_out_last(e_ol[i]), .enc_out_sys(e_s[i]),
      .enc_out_par1(e_p1[i]), .enc_out_par2(e_p2[i]), .enc_out_par(e_p[i]),
      .rate_half, .num_iter,
      .dec_in_valid(d_iv[i]), .dec_in_sys(d_s[i]), .dec_in_p1(d_p1[i]), .dec_in_p2(d_p2[i]),
      .dec_in_ready(d_ir[i]), .dec_out_valid(d_ov[i]), .dec_out_bit(d_ob[i]), .dec_out_last(d_ol[i]),
      .dec_iter_done(d_it[i]));
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_point(input int i, input bit half, input int iters, input real ebn0);
    int n, m, fb, ff;
    int u[], c_sys[], c_p1[], c_p2[], c_p[], ls[], lp1[], lp2[], rx[], dec[];
    int errs, mism;
    real sigma;
    n = CFG_N[i]; m = CFG_M[i]; fb = CFG_FB[i]; ff = CFG_FF[i];
    u = new[n]; c_sys = new[n]; c_p1 = new[n]; c_p2 = new[n]; c_p = new[n];
    foreach (u[k]) u[k] = int'(rng32() & 1);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      e_iv[i] = 1'b1;
      e_ib[i] = logic'(u[k]);
    end
    @(negedge clk);
    e_iv[i] = 1'b0;
    while (!e_ov[i]) @(negedge clk);
    for (int k = 0; k < n; k++) begin
      c_sys[k] = int'(e_s[i]); c_p1[k] = int'(e_p1[i]); c_p2[k] = int'(e_p2[i]); c_p[k] = int'(e_p[i]);
      @(negedge clk);
    end
    sigma = sigma_for(ebn0, half ? 0.5 : 1.0 / 3.0);
    ls = new[n]; lp1 = new[n]; lp2 = new[n]; rx = new[n];
    for (int k = 0; k < n; k++) begin
      ls[k] = channel_llr(c_sys[k], sigma);
      if (half) begin
        rx[k]  = channel_llr(c_p[k], sigma);
        lp1[k] = (k % 2 == 0) ? rx[k] : 0;
        lp2[k] = (k % 2 == 0) ? 0 : rx[k];
      end else begin
        lp1[k] = channel_llr(c_p1[k], sigma);
        lp2[k] = channel_llr(c_p2[k], sigma);
      end
    end
    turbo_decode(m, fb, ff, 31, 90, iters, ls, lp1, lp2, dec);
    rate_half = half;
    num_iter  = 4'(iters);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      d_iv[i] = 1'b1;
      d_s[i]  = ch_llr_t'(ls[k]);
      d_p1[i] = ch_llr_t'(half ? rx[k] : lp1[k]);
      d_p2[i] = ch_llr_t'(half ? 0 : lp2[k]);
    end
    @(negedge clk);
    d_iv[i] = 1'b0;
    while (!d_ov[i]) @(negedge clk);
    errs = 0; mism = 0;
    for (int k = 0; k < n; k++) begin
      if (d_ob[i] != logic'(dec[k])) mism++;
      if (d_ob[i] != logic'(u[k])) errs++;
      @(negedge clk);
    end
    checks++;
    if (mism != 0) begin failures++; $display("  %0d bits differ from the reference decoder", mism); end
    $display("config (%0o, %0o) N=%0d rate %s iterations %0d Eb/N0 %0.1f dB: %0d errors in %0d bits (BER %0.2e)",
             fb, ff, n, half ? "1/2" : "1/3", iters, ebn0, errs, n, real'(errs) / real'(n));
  endtask

  initial begin
    for (int i = 0; i < NI; i++) begin
      e_iv[i] = 1'b0; e_ib[i] = 1'b0; d_iv[i] = 1'b0; d_s[i] = '0; d_p1[i] = '0; d_p2[i] = '0;
    end
    rate_half = 1'b0; num_iter = 4'd6;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // comparison with the reported (7, 5) result: rate 1/3, 8 iterations
    run_point(0, 1'b0, 8, 0.5);
    run_point(0, 1'b0, 8, 1.0);
    // rate 1/2 against rate 1/3 and memory-element comparison, N = 1000, 6 iterations
    for (int i = 1; i <= 2; i++) begin
      run_point(i, 1'b0, 6, 0.5);
      run_point(i, 1'b0, 6, 1.0);
      run_point(i, 1'b1, 6, 1.0);
      run_point(i, 1'b1, 6, 1.5);
    end
    // block length 5000, rate 1/3, 6 iterations
    run_point(3, 1'b0, 6, 0.5);
    run_point(4, 1'b0, 6, 0.5);
    // iteration sweep, (15, 12, 0), rate 1/3
    for (int it = 1; it <= 10; it += 3) run_point(1, 1'b0, it, 1.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
