// tb_rsc_encoder: checks the RSC encoder in the three configurations of the paper,
// (7, 5) with 2 memory elements, (15, 12, 0) with 3 and (71, 52, 0) with 5, against the
// polynomial recursion of the reference model, on random blocks with a clear between them.
module tb_rsc_encoder;
  import turbo_ref_pkg::*;

  localparam int L = 300;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear, en;
  logic u_a, u_b, u_c;
  logic p_a, p_b, p_c;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  rsc_encoder #(.M(2), .FB('o7),  .FF('o5))  dut_a (.clk, .rst_n, .clear, .en, .u(u_a), .par(p_a), .state());
  rsc_encoder #(.M(3), .FB('o15), .FF('o12)) dut_b (.clk, .rst_n, .clear, .en, .u(u_b), .par(p_b), .state());
  rsc_encoder #(.M(5), .FB('o71), .FF('o52)) dut_c (.clk, .rst_n, .clear, .en, .u(u_c), .par(p_c), .state());

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(input int len);
    int ua[], ub[], uc[], pa[], pb[], pc[];
    ua = new[len]; ub = new[len]; uc = new[len];
    foreach (ua[k]) begin
      ua[k] = int'(rng32() & 1);
      ub[k] = int'(rng32() & 1);
      uc[k] = int'(rng32() & 1);
    end
    rsc_encode(2, 'o7,  'o5,  ua, pa);
    rsc_encode(3, 'o15, 'o12, ub, pb);
    rsc_encode(5, 'o71, 'o52, uc, pc);
    @(negedge clk);
    clear = 1'b1; en = 1'b0;
    @(negedge clk);
    clear = 1'b0;
    for (int k = 0; k < len; k++) begin
      en  = 1'b1;
      u_a = logic'(ua[k]); u_b = logic'(ub[k]); u_c = logic'(uc[k]);
      #1;
      checks += 3;
      if (p_a !== logic'(pa[k])) begin failures++; $display("(7,5) k=%0d got %b exp %0d", k, p_a, pa[k]); end
      if (p_b !== logic'(pb[k])) begin failures++; $display("(15,12) k=%0d got %b exp %0d", k, p_b, pb[k]); end
      if (p_c !== logic'(pc[k])) begin failures++; $display("(71,52) k=%0d got %b exp %0d", k, p_c, pc[k]); end
      @(negedge clk);
    end
    en = 1'b0;
  endtask

  initial begin
    clear = 1'b0; en = 1'b0; u_a = 1'b0; u_b = 1'b0; u_c = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_block(L);
    run_block(L / 3);
    // impulse response of (7,5): 1 0 0 ... gives parity 1 1 1 0 1 1 0 1 1 0 ...
    begin
      int imp[], pimp[];
      imp = new[12];
      foreach (imp[k]) imp[k] = (k == 0);
      rsc_encode(2, 'o7, 'o5, imp, pimp);
      checks++;
      if (pimp[0] != 1 || pimp[1] != 1 || pimp[2] != 1 || pimp[3] != 0 || pimp[4] != 1) begin
        failures++;
        $display("reference (7,5) impulse response wrong");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
