// qpp_interleaver: address generator of the turbo interleaver.
//
// The permutation is the quadratic permutation polynomial pi(k) = (F1 k + F2 k^2) mod N, which
// rearranges 0..N-1 with no repetition when F1 is coprime with N and F2 holds every prime
// factor of N. It is produced without multipliers: with d(k) = pi(k+1) - pi(k)
// = (F1 + F2 (2k+1)) mod N, a step up does pi += d, d += 2 F2 and a step down does
// d -= 2 F2, pi -= d, all modulo N with one conditional add or subtract. The generator can
// therefore walk the block forwards and backwards, as the two sweeps of a Log-MAP decoder do.
// The paper says only that the interleaver is a random rearrangement with no repetition; the
// polynomial and its coefficients are this design's choice. Defaults: N = 1000 (the paper's
// block length), F1 = 31, F2 = 90.
//
// Interface: `restart` sets k = 0; `step_up` / `step_down` move k by one on the next edge
// (k stays within 0..N-1). `k` and `pi` are registered and always consistent: pi = pi(k).
module qpp_interleaver #(
  parameter int N  = 1000,
  parameter int F1 = 31,
  parameter int F2 = 90,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          step_up,
  input  logic          step_down,
  output logic [AW-1:0] k,
  output logic [AW-1:0] pi
);

  localparam logic [AW:0] NN   = (AW+1)'(N);
  localparam logic [AW:0] D0   = (AW+1)'((F1 + F2) % N);
  localparam logic [AW:0] TWO2 = (AW+1)'((2 * F2) % N);

  logic [AW:0] d_q, pi_q;   // one extra bit for the modular add
  logic [AW:0] d_up, d_dn, pi_up, pi_dn;

  // modular add / subtract of two values below N
  function automatic logic [AW:0] add_mod(logic [AW:0] a, logic [AW:0] b);
    logic [AW+1:0] s;
    s = {1'b0, a} + {1'b0, b};
    return (s >= {1'b0, NN}) ? (AW+1)'(s - {1'b0, NN}) : s[AW:0];
  endfunction
  function automatic logic [AW:0] sub_mod(logic [AW:0] a, logic [AW:0] b);
    return (a >= b) ? a - b : a + NN - b;
  endfunction

  always_comb begin
    pi_up = add_mod(pi_q, d_q);
    d_up  = add_mod(d_q, TWO2);
    d_dn  = sub_mod(d_q, TWO2);
    pi_dn = sub_mod(pi_q, d_dn);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k    <= '0;
      pi_q <= '0;
      d_q  <= D0;
    end else if (restart) begin
      k    <= '0;
      pi_q <= '0;
      d_q  <= D0;
    end else if (step_up && k != AW'(N - 1)) begin
      k    <= k + 1'b1;
      pi_q <= pi_up;
      d_q  <= d_up;
    end else if (step_down && k != '0) begin
      k    <= k - 1'b1;
      pi_q <= pi_dn;
      d_q  <= d_dn;
    end
  end

  assign pi = pi_q[AW-1:0];

  initial assert (N >= 2 && F1 > 0 && F2 > 0) else $fatal(1, "qpp_interleaver: bad parameters");

endmodule
