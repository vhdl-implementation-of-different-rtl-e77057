// tb_turbo_codec: end-to-end test of the turbo codec at its default size (configuration
// (15, 12, 0), block length 1000). Random information blocks go through the encoder; its coded
// bits are checked against the reference encoder, sent over a BPSK/AWGN channel model and fed
// to the decoder, whose output must equal the software turbo decoder bit for bit. Blocks are run
// at rate 1/3 and at rate 1/2 (punctured parity) and with 1 and 6 iterations. The test counts
// how often each mechanism occurred (encoded blocks, punctured blocks, decoder iterations,
// channel errors corrected by the decoder) and fails if one never did.
module tb_turbo_codec;
  import turbo_pkg::*;
  import turbo_ref_pkg::*;

  localparam int N = 1000, M = 3, FB = 'o15, FF = 'o12, F1 = 31, F2 = 90;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       enc_in_valid, enc_in_bit, enc_in_ready;
  logic       enc_out_valid, enc_out_last, enc_out_sys, enc_out_par1, enc_out_par2, enc_out_par;
  logic       rate_half;
  logic [3:0] num_iter;
  logic       dec_in_valid, dec_in_ready, dec_out_valid, dec_out_bit, dec_out_last, dec_iter_done;
  ch_llr_t    dec_in_sys, dec_in_p1, dec_in_p2;
  int         checks = 0, failures = 0;
  int         n_rate3 = 0, n_rate2 = 0, n_iter = 0, n_corrected = 0, n_single = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && dec_iter_done) n_iter++;

  turbo_codec dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input bit half, input int iters, input real ebn0);
    int u[], ui[], p1[], p2[], c_sys[], c_p1[], c_p2[], c_p[];
    int ls[], lp1[], lp2[], rx[], dec[];
    int raw_errs, errs, enc_bad;
    real sigma;
    u = new[N]; ui = new[N];
    foreach (u[k]) u[k] = int'(rng32() & 1);
    foreach (u[k]) ui[k] = u[qpp(N, F1, F2, k)];
    rsc_encode(M, FB, FF, u, p1);
    rsc_encode(M, FB, FF, ui, p2);
    // ---- encode
    c_sys = new[N]; c_p1 = new[N]; c_p2 = new[N]; c_p = new[N];
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      enc_in_valid = 1'b1;
      enc_in_bit   = logic'(u[k]);
    end
    @(negedge clk);
    enc_in_valid = 1'b0;
    while (!enc_out_valid) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      c_sys[k] = int'(enc_out_sys); c_p1[k] = int'(enc_out_par1);
      c_p2[k]  = int'(enc_out_par2); c_p[k] = int'(enc_out_par);
      @(negedge clk);
    end
    enc_bad = 0;
    for (int k = 0; k < N; k++)
      if (c_sys[k] != u[k] || c_p1[k] != p1[k] || c_p2[k] != p2[k] ||
          c_p[k] != ((k % 2 == 0) ? p1[k] : p2[k])) enc_bad++;
    checks++;
    if (enc_bad != 0) begin failures++; $display("encoder: %0d wrong positions", enc_bad); end
    if (half) n_rate2++; else n_rate3++;
    // ---- channel: the coded bits actually produced by the encoder
    sigma = sigma_for(ebn0, half ? 0.5 : 1.0 / 3.0);
    ls = new[N]; lp1 = new[N]; lp2 = new[N]; rx = new[N];
    raw_errs = 0;
    for (int k = 0; k < N; k++) begin
      ls[k] = channel_llr(c_sys[k], sigma);
      if ((ls[k] > 0) != (u[k] != 0)) raw_errs++;
      if (half) begin
        rx[k]  = channel_llr(c_p[k], sigma);
        lp1[k] = (k % 2 == 0) ? rx[k] : 0;
        lp2[k] = (k % 2 == 0) ? 0 : rx[k];
      end else begin
        lp1[k] = channel_llr(c_p1[k], sigma);
        lp2[k] = channel_llr(c_p2[k], sigma);
      end
    end
    turbo_decode(M, FB, FF, F1, F2, iters, ls, lp1, lp2, dec);
    // ---- decode
    rate_half = half;
    num_iter  = 4'(iters);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      dec_in_valid = 1'b1;
      dec_in_sys   = ch_llr_t'(ls[k]);
      dec_in_p1    = ch_llr_t'(half ? rx[k] : lp1[k]);
      dec_in_p2    = ch_llr_t'(half ? 0 : lp2[k]);
    end
    @(negedge clk);
    dec_in_valid = 1'b0;
    while (!dec_out_valid) @(negedge clk);
    errs = 0;
    for (int k = 0; k < N; k++) begin
      checks++;
      if (!dec_out_valid || dec_out_bit != logic'(dec[k])) begin
        failures++;
        if (failures < 20) $display("bit %0d: got %b, reference %0d", k, dec_out_bit, dec[k]);
      end
      if (dec_out_bit != logic'(u[k])) errs++;
      @(negedge clk);
    end
    if (errs < raw_errs) n_corrected++;
    if (iters == 1) n_single++;
    $display("rate %s, %0d iterations, Eb/N0 %0.1f dB: %0d systematic bits wrong on the channel, %0d after decoding",
             half ? "1/2" : "1/3", iters, ebn0, raw_errs, errs);
  endtask

  initial begin
    enc_in_valid = 1'b0; enc_in_bit = 1'b0; rate_half = 1'b0; num_iter = 4'd6;
    dec_in_valid = 1'b0; dec_in_sys = '0; dec_in_p1 = '0; dec_in_p2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_block(1'b0, 6, 1.0);
    run_block(1'b1, 6, 1.5);
    run_block(1'b0, 1, 1.0);
    $display("mechanisms: rate-1/3 blocks %0d, rate-1/2 (punctured) blocks %0d, iterations %0d, single-iteration blocks %0d, blocks with errors corrected %0d",
             n_rate3, n_rate2, n_iter, n_single, n_corrected);
    checks += 5;
    if (n_rate3 == 0) failures++;
    if (n_rate2 == 0) failures++;
    if (n_iter != 13) failures++;
    if (n_single == 0) failures++;
    if (n_corrected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
