// tb_turbo_encoder: encodes random blocks with two encoder instances, configuration (15, 12, 0)
// with N = 40 and configuration (71, 52, 0) with N = 64, and checks every output bit against
// the reference: sys = u, par_1 = RSC(u), par_2 = RSC(u interleaved by (F1 k + F2 k^2) mod N),
// par = par_1 on even and par_2 on odd positions. Also checks the timing: the first coded bit
// 3 cycles after the last information bit, then one per cycle, out_last on the N-th.
module tb_turbo_encoder;
  import turbo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instance A: (15, 12, 0), N = 40
  logic a_iv, a_ib, a_ir, a_ov, a_ol, a_s, a_p1, a_p2, a_p;
  turbo_encoder #(.N(40), .M(3), .FB('o15), .FF('o12), .F1(3), .F2(10)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_bit(a_ib), .in_ready(a_ir),
    .out_valid(a_ov), .out_last(a_ol), .out_sys(a_s), .out_par1(a_p1), .out_par2(a_p2), .out_par(a_p));
  // instance B: (71, 52, 0), N = 64
  logic b_iv, b_ib, b_ir, b_ov, b_ol, b_s, b_p1, b_p2, b_p;
  turbo_encoder #(.N(64), .M(5), .FB('o71), .FF('o52), .F1(7), .F2(16)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_bit(b_ib), .in_ready(b_ir),
    .out_valid(b_ov), .out_last(b_ol), .out_sys(b_s), .out_par1(b_p1), .out_par2(b_p2), .out_par(b_p));

  task automatic run_block(input bit inst_b, input int n, input int m, input int fb, input int ff,
                           input int f1, input int f2);
    int u[], ui[], p1[], p2[];
    int lat;
    u  = new[n];
    ui = new[n];
    foreach (u[k]) u[k] = int'(rng32() & 1);
    foreach (u[k]) ui[k] = u[qpp(n, f1, f2, k)];
    rsc_encode(m, fb, ff, u, p1);
    rsc_encode(m, fb, ff, ui, p2);
    // load, with the ready check
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      checks++;
      if (!(inst_b ? b_ir : a_ir)) begin failures++; $display("not ready at bit %0d", k); end
      if (inst_b) begin b_iv = 1'b1; b_ib = logic'(u[k]); end
      else        begin a_iv = 1'b1; a_ib = logic'(u[k]); end
    end
    @(negedge clk);
    a_iv = 1'b0; b_iv = 1'b0;
    // latency to the first output
    lat = 1;
    while (!(inst_b ? b_ov : a_ov) && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    // lat counts sampling points after the edge that took the last bit: edges = lat - 1
    if (lat - 1 != 3) begin failures++; $display("latency %0d edges, expected 3", lat - 1); end
    for (int k = 0; k < n; k++) begin
      logic s, q1, q2, q, v, l;
      v  = inst_b ? b_ov : a_ov;  l  = inst_b ? b_ol : a_ol;
      s  = inst_b ? b_s  : a_s;   q1 = inst_b ? b_p1 : a_p1;
      q2 = inst_b ? b_p2 : a_p2;  q  = inst_b ? b_p  : a_p;
      checks++;
      if (!v || l != (k == n - 1) || s != logic'(u[k]) || q1 != logic'(p1[k]) || q2 != logic'(p2[k])
          || q != logic'((k % 2 == 0) ? p1[k] : p2[k])) begin
        failures++;
        $display("%s k=%0d v=%b l=%b sys=%b/%0d p1=%b/%0d p2=%b/%0d p=%b", inst_b ? "B" : "A", k, v, l,
                 s, u[k], q1, p1[k], q2, p2[k], q);
      end
      @(negedge clk);
    end
    checks++;
    if (inst_b ? b_ov : a_ov) begin failures++; $display("output beyond N"); end
  endtask

  initial begin
    a_iv = 1'b0; a_ib = 1'b0; b_iv = 1'b0; b_ib = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) run_block(1'b0, 40, 3, 'o15, 'o12, 3, 10);
    repeat (3) run_block(1'b1, 64, 5, 'o71, 'o52, 7, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
