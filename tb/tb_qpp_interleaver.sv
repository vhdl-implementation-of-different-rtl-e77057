// tb_qpp_interleaver: walks the interleaver up and down over a whole block, for a short block
// (N = 40, F1 = 3, F2 = 10) and for the default block of 1000 bits, and checks every pi(k)
// against the closed formula (F1 k + F2 k^2) mod N and that pi is a permutation.
module tb_qpp_interleaver;
  import turbo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic restart, up, dn;
  logic [5:0] k_s, pi_s;
  logic [9:0] k_l, pi_l;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  qpp_interleaver #(.N(40), .F1(3), .F2(10)) dut_s (.clk, .rst_n, .restart, .step_up(up), .step_down(dn), .k(k_s), .pi(pi_s));
  qpp_interleaver                            dut_l (.clk, .rst_n, .restart, .step_up(up), .step_down(dn), .k(k_l), .pi(pi_l));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ks = 0;   // expected position of the short generator (it saturates at 39 and 0)

  task automatic check_pos(input int exp_k);
    checks++;
    if (int'(k_s) != ks || int'(pi_s) != qpp(40, 3, 10, ks)) begin
      failures++;
      $display("N=40 k=%0d/%0d pi=%0d exp %0d", k_s, ks, pi_s, qpp(40, 3, 10, ks));
    end
    checks++;
    if (int'(k_l) != exp_k || int'(pi_l) != qpp(1000, 31, 90, exp_k)) begin
      failures++;
      $display("N=1000 k=%0d/%0d pi=%0d exp %0d", k_l, exp_k, pi_l, qpp(1000, 31, 90, exp_k));
    end
  endtask

  initial begin
    bit seen [1000];
    restart = 1'b0; up = 1'b0; dn = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // walk up to the end of the long block, collecting the permutation
    for (int k = 0; k < 1000; k++) begin
      check_pos(k);
      checks++;
      if (seen[pi_l]) begin failures++; $display("pi repeats %0d", pi_l); end
      seen[pi_l] = 1'b1;
      up = 1'b1;
      @(negedge clk);
      ks = (ks < 39) ? ks + 1 : 39;
    end
    up = 1'b0;
    check_pos(999);                  // saturates at N-1
    // walk back down
    for (int k = 999; k >= 0; k--) begin
      check_pos(k);
      dn = 1'b1;
      @(negedge clk);
      ks = (ks > 0) ? ks - 1 : 0;
    end
    dn = 1'b0;
    check_pos(0);                    // saturates at 0
    // a few steps up, a pause, restart
    up = 1'b1; repeat (5) @(negedge clk); up = 1'b0;
    ks = 5;
    check_pos(5);
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    ks = 0;
    check_pos(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
