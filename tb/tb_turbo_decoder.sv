// tb_turbo_decoder: feeds the turbo decoder (configuration (15, 12, 0), N = 40) with noisy
// received blocks of random data, encoded and passed through a BPSK/AWGN channel by the
// reference models, at rate 1/3 and at rate 1/2 (punctured parity) and with 1, 2 and 6
// iterations. Each decoded block must equal, bit for bit, the output of the software turbo
// decoder; at a good channel it must also equal the transmitted data. Checks the decoding
// time, num_iter (4N + 6) + 1 cycles from the last received value to the first decoded bit, and
// the number of iter_done pulses.
module tb_turbo_decoder;
  import turbo_pkg::*;
  import turbo_ref_pkg::*;

  localparam int N = 40, M = 3, FB = 'o15, FF = 'o12, F1 = 3, F2 = 10;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       rate_half;
  logic [3:0] num_iter;
  logic       in_valid, in_ready, out_valid, out_bit, out_last, iter_done;
  ch_llr_t    in_sys, in_p1, in_p2;
  int         checks = 0, failures = 0;
  int         iter_pulses = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && iter_done) iter_pulses++;

  turbo_decoder #(.N(N), .M(M), .FB(FB), .FF(FF), .F1(F1), .F2(F2)) dut (
    .clk, .rst_n, .rate_half, .num_iter, .in_valid, .in_sys, .in_p1, .in_p2, .in_ready,
    .out_valid, .out_bit, .out_last, .iter_done);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input bit half, input int iters, input real ebn0, input bit expect_clean);
    int u[], ui[], p1[], p2[], ls[], lp1[], lp2[], rx[], dec[];
    int cyc, errs;
    real sigma;
    u = new[N]; ui = new[N];
    foreach (u[k]) u[k] = int'(rng32() & 1);
    foreach (u[k]) ui[k] = u[qpp(N, F1, F2, k)];
    rsc_encode(M, FB, FF, u, p1);
    rsc_encode(M, FB, FF, ui, p2);
    sigma = sigma_for(ebn0, half ? 0.5 : 1.0 / 3.0);
    ls = new[N]; lp1 = new[N]; lp2 = new[N]; rx = new[N];
    for (int k = 0; k < N; k++) begin
      ls[k] = channel_llr(u[k], sigma);
      if (half) begin
        rx[k]  = channel_llr((k % 2 == 0) ? p1[k] : p2[k], sigma);
        lp1[k] = (k % 2 == 0) ? rx[k] : 0;
        lp2[k] = (k % 2 == 0) ? 0 : rx[k];
      end else begin
        lp1[k] = channel_llr(p1[k], sigma);
        lp2[k] = channel_llr(p2[k], sigma);
      end
    end
    turbo_decode(M, FB, FF, F1, F2, iters, ls, lp1, lp2, dec);
    iter_pulses = 0;
    rate_half = half;
    num_iter  = 4'(iters);
    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      checks++;
      if (!in_ready) begin failures++; $display("not ready at %0d", k); end
      in_valid = 1'b1;
      in_sys   = ch_llr_t'(ls[k]);
      in_p1    = ch_llr_t'(half ? rx[k] : lp1[k]);
      in_p2    = ch_llr_t'(half ? 0 : lp2[k]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    cyc = 1;
    while (!out_valid && cyc < 20 * N * 16) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc - 1 != iters * (4 * N + 6) + 1) begin
      failures++;
      $display("decoding took %0d cycles, expected %0d", cyc - 1, iters * (4 * N + 6) + 1);
    end
    checks++;
    if (iter_pulses != iters) begin failures++; $display("iter_done %0d times, expected %0d", iter_pulses, iters); end
    errs = 0;
    for (int k = 0; k < N; k++) begin
      checks++;
      if (!out_valid || out_last != (k == N - 1) || out_bit != logic'(dec[k])) begin
        failures++;
        $display("bit %0d: valid=%b last=%b got %b, reference %0d", k, out_valid, out_last, out_bit, dec[k]);
      end
      if (out_bit != logic'(u[k])) errs++;
      @(negedge clk);
    end
    if (expect_clean) begin
      checks++;
      if (errs != 0) begin failures++; $display("%0d bit errors on a good channel", errs); end
    end
    $display("rate %s, %0d iterations, Eb/N0 %0.1f dB: %0d bit errors", half ? "1/2" : "1/3", iters, ebn0, errs);
  endtask

  initial begin
    rate_half = 1'b0; num_iter = 4'd6; in_valid = 1'b0; in_sys = '0; in_p1 = '0; in_p2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_block(1'b0, 6, 6.0, 1'b1);
    run_block(1'b1, 6, 6.0, 1'b1);
    run_block(1'b0, 1, 0.0, 1'b0);
    run_block(1'b0, 2, 0.5, 1'b0);
    run_block(1'b0, 6, 0.0, 1'b0);
    run_block(1'b1, 6, 0.5, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
