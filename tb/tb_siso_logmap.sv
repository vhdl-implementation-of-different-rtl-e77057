// tb_siso_logmap: drives the Log-MAP SISO with random soft inputs and with the noisy
// transmission of an encoded block, for configurations (15, 12, 0) (N = 40) and (7, 5)
// (N = 30), and compares every a-posteriori and extrinsic LLR with the software Log-MAP model.
// Checks that each output follows its backward sample by one cycle, and that with a clean
// channel the signs of the a-posteriori LLRs give back the encoded bits.
module tb_siso_logmap;
  import turbo_pkg::*;
  import turbo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic     iv_a, ib_a, ov_a, iv_b, ib_b, ov_b;
  ch_llr_t  s_in, p_in;
  ext_llr_t a_in;
  metric_t  llr_a, llr_b;
  ext_llr_t ext_a, ext_b;

  siso_logmap #(.N(40), .M(3), .FB('o15), .FF('o12)) dut_a (
    .clk, .rst_n, .in_valid(iv_a), .in_bwd(ib_a), .in_sys(s_in), .in_par(p_in), .in_apr(a_in),
    .out_valid(ov_a), .out_llr(llr_a), .out_ext(ext_a));
  siso_logmap #(.N(30), .M(2), .FB('o7), .FF('o5)) dut_b (
    .clk, .rst_n, .in_valid(iv_b), .in_bwd(ib_b), .in_sys(s_in), .in_par(p_in), .in_apr(a_in),
    .out_valid(ov_b), .out_llr(llr_b), .out_ext(ext_b));

  // mode 0: random inputs; mode 1: encoded random bits over a clean channel, no a-priori
  task automatic run_block(input bit inst_b, input int mode);
    int n, m, fb, ff;
    int ls[], lp[], la[], rl[], re[], u[], p[];
    n  = inst_b ? 30 : 40;
    m  = inst_b ? 2 : 3;
    fb = inst_b ? 'o7 : 'o15;
    ff = inst_b ? 'o5 : 'o12;
    ls = new[n]; lp = new[n]; la = new[n]; u = new[n];
    foreach (u[k]) u[k] = int'(rng32() & 1);
    rsc_encode(m, fb, ff, u, p);
    for (int k = 0; k < n; k++) begin
      if (mode == 0) begin
        ls[k] = int'(rng32() % 63) - 31;
        lp[k] = int'(rng32() % 63) - 31;
        la[k] = int'(rng32() % 256) - 128;
      end else begin
        ls[k] = channel_llr(u[k], 0.5);
        lp[k] = channel_llr(p[k], 0.5);
        la[k] = 0;
      end
    end
    siso(m, fb, ff, ls, lp, la, rl, re);
    // forward sweep
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      if (inst_b) begin iv_b = 1'b1; ib_b = 1'b0; end else begin iv_a = 1'b1; ib_a = 1'b0; end
      s_in = ch_llr_t'(ls[k]); p_in = ch_llr_t'(lp[k]); a_in = ext_llr_t'(la[k]);
    end
    @(negedge clk);
    iv_a = 1'b0; iv_b = 1'b0;
    // backward sweep; output k appears one cycle after sample k
    for (int k = n - 1; k >= -1; k--) begin
      @(negedge clk);
      if (k < n - 1) begin
        logic    ov;
        metric_t l;
        ext_llr_t e;
        ov = inst_b ? ov_b : ov_a;
        l  = inst_b ? llr_b : llr_a;
        e  = inst_b ? ext_b : ext_a;
        checks++;
        if (!ov || int'(l) != rl[k+1] || int'(e) != re[k+1]) begin
          failures++;
          $display("%s k=%0d ov=%b llr=%0d/%0d ext=%0d/%0d", inst_b ? "B" : "A", k + 1, ov,
                   l, rl[k+1], e, re[k+1]);
        end
        if (mode == 1) begin
          checks++;
          if ((l > 0) != (u[k+1] != 0)) begin failures++; $display("clean channel: bit %0d wrong", k + 1); end
        end
      end
      if (k >= 0) begin
        if (inst_b) begin iv_b = 1'b1; ib_b = 1'b1; end else begin iv_a = 1'b1; ib_a = 1'b1; end
        s_in = ch_llr_t'(ls[k]); p_in = ch_llr_t'(lp[k]); a_in = ext_llr_t'(la[k]);
      end else begin
        iv_a = 1'b0; iv_b = 1'b0;
      end
    end
    @(negedge clk);
    checks++;
    if (ov_a || ov_b) begin failures++; $display("output without a sample"); end
  endtask

  initial begin
    iv_a = 1'b0; ib_a = 1'b0; iv_b = 1'b0; ib_b = 1'b0; s_in = '0; p_in = '0; a_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 3; r++) begin
      run_block(1'b0, 0);
      run_block(1'b1, 0);
    end
    run_block(1'b0, 1);
    run_block(1'b1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
