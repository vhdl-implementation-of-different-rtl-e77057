# Turbo encoder and iterative Log-MAP turbo decoder

A turbo code sends every information bit three times: once as it is (the systematic bit) and
twice as parity, from two small recursive convolutional encoders. The first encoder sees the
block in its natural order, the second sees it scrambled by an interleaver. The receiver decodes
each of the two codes with a soft-in soft-out (SISO) decoder. Each decoder passes what it learned
about every bit (its *extrinsic* information) to the other, and the two run in turns for a few
iterations. This exchange brings the error rate close to the Shannon limit at modest
complexity. Puncturing, which sends only every other parity bit of each encoder, raises the code
rate from 1/3 to 1/2.

This RTL implements both ends in synthesizable SystemVerilog:

* a turbo encoder with two recursive systematic convolutional (RSC) encoders, a block
  interleaver and a puncturer. It produces the rate-1/3 streams (sys, par_1, par_2) and the
  rate-1/2 stream (sys, par) together.
* a turbo decoder with two Log-MAP SISO decoders. They are joined by an interleaver and a
  deinterleaver, run for a chosen number of iterations, and end with a hard decision.

The design follows the paper "VHDL Implementation of different Turbo Encoder using Log-MAP
Decoder" (A. K. Gupta, S. Kumar). That paper gives the block structure, the code configurations,
the block length and the iteration count. It gives no arithmetic, interfaces or schedules.
Everything at that level is this design's own and is marked as such below.

## The constituent code

Each RSC encoder is an M-stage shift register with feedback. The paper names its configurations
by two octal polynomials. The first number is the feedback polynomial and the second the parity
polynomial. The most significant of the M+1 bits is the coefficient of D^0.

| configuration | feedback | parity | M (stages) | states |
|---|---|---|---|---|
| (7, 5)        | 111 = 1 + D + D^2 | 101 = 1 + D^2 | 2 | 4 |
| (15, 12, 0) **default** | 1101 = 1 + D + D^3 | 1010 = 1 + D^2 | 3 | 8 |
| (71, 52, 0)   | 111001 = 1 + D + D^2 + D^5 | 101010 = 1 + D^2 + D^4 | 5 | 32 |

The three configurations come from the paper. Three points about them do not come from the paper:

* **Which number is the feedback.** The paper writes the first configuration both as (5, 7) and
  as (7, 5). Here the first number is always taken as the feedback polynomial. Only that reading
  gives (71, 52, 0) a feedback polynomial with both end terms.
* **The second configuration.** For (15, 12, 0) the paper also prints the binary form "(1111,
  1010)", which does not match octal 15 = 1101. The RTL uses the octal name.
* **The trailing "0".** Its meaning is not given, so it is ignored.

The polynomials are parameters (`M`, `FB`, `FF`) of every module down to the SISO decoder. The
other two codes are one parameter change away.

Every step of the encoder does two things:

* It computes the feedback bit `w = u xor (feedback taps on the register)`, which then enters
  the register.
* It outputs the parity bit `p = (parity tap 0 and w) xor (parity taps on the register)`.

Both encoders start each block in the all-zero state. They are not terminated: no tail bits are
sent, and the decoder treats the end of the trellis as open.

## The interleaver

The paper asks only for a random rearrangement with no repetition. Here that rearrangement is
the quadratic permutation polynomial

    pi(k) = (F1 k + F2 k^2) mod N,      N = 1000, F1 = 31, F2 = 90.

This is a permutation whenever F1 is coprime with N and F2 contains every prime factor of N.
`qpp_interleaver` computes it without multipliers, by keeping the difference
`d(k) = pi(k+1) - pi(k) = (F1 + F2 (2k + 1)) mod N`:

* a step up is `pi += d; d += 2 F2`;
* a step down is `d -= 2 F2; pi -= d`.

Each operation is modulo N and needs one conditional correction. The generator can walk both
ways, which the decoder needs: its backward sweep visits the interleaved positions in reverse
order. The same generator serves the encoder (`pi(k)` selects the bit for the second RSC
encoder) and the decoder, where it acts as both interleaver and deinterleaver (below). A
different permutation can be substituted by changing `F1`/`F2`, or by replacing the module
behind the same `k`/`pi` interface.

## Encoder dataflow and timing

`turbo_encoder` first loads a whole block into a 1-bit-wide buffer, one bit per `in_valid`.
It has to, because bit pi(k) can lie anywhere in the block. It then reads the buffer at k and at
pi(k) in the same cycle. The two bits go to RSC encoder 1 and RSC encoder 2, and each cycle
produces:

* `out_sys` = u[k],
* `out_par1`, `out_par2` = the two parities (rate 1/3),
* `out_par` = par_1 for even k and par_2 for odd k (`puncturer`, rate 1/2).

The first coded bits appear on the 3rd clock edge after the edge that took the last information
bit. After that, one triple comes out per cycle for N cycles, and `out_last` marks the N-th.
Loading of the next block can start while the last two outputs are still in the pipeline.

## The Log-MAP SISO decoder

This is the part that takes most of the logic and most of the explanation.

**Soft values.** All soft values are log-likelihood ratios L = ln(P(bit=1)/P(bit=0)), so that
positive means "1". They are two's complement with 2 fractional bits (LSB = 0.25):

* received channel values: 6 bits;
* extrinsic values exchanged between the decoders: 8 bits, saturating;
* path metrics and the a-posteriori LLR: 16 bits.

**Branch metric.** Per bit k a SISO gets:

* the systematic channel LLR `Ls`,
* the parity channel LLR `Lp`,
* the a-priori LLR `La`, which is the other decoder's extrinsic.

A trellis branch with input u and parity p gets `gamma = u (Ls + La) + p Lp`. This is the usual
±1/2 form shifted by a constant, which cancels in every difference taken below.

**max\*.** Log-MAP replaces the sum of probabilities by
`max*(a, b) = max(a, b) + ln(1 + exp(-|a - b|))`. With 2 fractional bits the correction is
round(4 ln(1 + exp(-d/4))), with d = |a - b| in LSBs. That gives the table:

| d | 0 | 1–3 | 4–8 | ≥ 9 |
|---|---|---|---|---|
| correction | 3 | 2 | 1 | 0 |

(function `max_star` in `turbo_pkg`). Replacing the correction by 0 would give Max-Log-MAP.

**Two sweeps per block.** The decoder processes the whole block without windowing:

1. *Forward*, k = 0 … N-1. Compute
   `alpha_{k+1}(s') = max*` over the two branches into s' of `alpha_k(s) + gamma_k`. Each
   alpha_k vector (2^M × 16 bits) is stored in an N-deep alpha memory. The start state is 0
   (alpha_0 = 0 for state 0, −4096 for the others).
2. *Backward*, k = N-1 … 0. Start from beta_N = 0 for all states (open end). For each k, read
   alpha_k back, and compute
   `L_k = max*_{u=1}(alpha_k + gamma_k + beta_{k+1}) - max*_{u=0}(…)`
   and `beta_k(s) = max*` over the two branches out of s.

   The extrinsic output is `Le_k = L_k - Ls_k - La_k`, saturated to 8 bits.

After every step, the state-0 metric is subtracted from all metrics (normalisation). This bounds
them well inside 16 bits for every supported code.

**Timing.** One sample is processed per cycle in each sweep. Outputs follow the backward
samples by one cycle. The alpha memory is read one cycle ahead, so the caller leaves at least
one idle cycle between the two sweeps.

## The turbo decoder: interleaving by addressing

`turbo_decoder` follows the paper's decoder diagram. Received values are stored in three
memories, r0 (systematic), r1 and r2 (parities). In rate-1/2 mode the single received parity
stream is depunctured while it loads:

* even positions go to r1, odd positions to r2;
* the missing values are written as 0, meaning "no information".

An iteration has two half-iterations, one per SISO decoder. Both use the same sequencer, which
walks k forwards and then backwards and gets pi(k) from the interleaver:

| half | SISO | systematic | parity | a-priori | extrinsic written to |
|---|---|---|---|---|---|
| 1 | SISO 1 | r0[k] | r1[k] | Le2[k] (0 in iteration 1) | Le1[k] |
| 2 | SISO 2 | r0[pi(k)] | r2[k] | Le1[pi(k)] | Le2[pi(k)] |

Reading at pi(k) is the interleaver, and writing at pi(k) is the deinterleaver. No data is
physically reordered. In the last iteration the sign of SISO 2's a-posteriori LLR decides bit
pi(k), which is stored at pi(k) in a decision memory. The decided block is then streamed out in
natural order.

Timing of a half-iteration, 2N + 3 cycles in all:

* N cycles of forward sweep;
* 1 idle cycle;
* N cycles of backward sweep;
* 2 cycles that drain the pipeline, so the next half reads fully written extrinsic memory.

From the last received value to the first decoded bit takes `num_iter × (4N + 6) + 1` cycles.
At N = 1000 with 6 iterations that is 24 037 cycles. The bits then come out one per cycle.
`num_iter` (1 to 15) is a run-time input. The design was evaluated with 6, the point beyond
which more iterations barely help. `iter_done` pulses once per iteration.

The two SISO instances work one after the other and never at the same time. They could share
one datapath. They are kept as two instances to match the two-decoder structure, each with its
own alpha memory.

## Top level

`turbo_codec` places the encoder and the decoder side by side with a common configuration. The
channel between them (BPSK over additive white Gaussian noise) is not hardware:

* the coded bits leave on the `enc_*` ports;
* the received LLRs, quantised to 6 bits, enter on the `dec_*` ports;
* `rate_half` tells the decoder whether `dec_in_p1` carries par_1 (rate 1/3, with par_2 on
  `dec_in_p2`) or the punctured stream (rate 1/2).

Defaults: configuration (15, 12, 0), N = 1000, F1 = 31, F2 = 90. Memory at the defaults:

* 2 × 1000 × 128 bits of alpha memory;
* 3 × 6 × 1000 bits of channel memory;
* 2 × 8 × 1000 bits of extrinsic memory;
* 1000 bits each of encoder buffer and decision memory.

With (71, 52, 0) each alpha memory grows to 1000 × 512 bits.

## How far it can be trusted, and where it departs from the paper

* Every coded bit is checked against an independent software encoder. The decoder is checked
  bit for bit against a software Log-MAP turbo decoder in the testbench package. That model
  uses the same fixed-point definitions but computes the max* correction from the real-valued
  formula. The decoder matches it on noisy blocks, at both rates, with 1 to 10 iterations, for
  all three configurations and for block lengths 1000 and 5000.
* The error rates printed by the workload test are from one block per point and are only a
  sanity check. They are not a reproduction of the paper's BER curves, which need many blocks
  per point.
* Own choices, not from the paper:
  * the interleaver permutation;
  * no trellis termination;
  * passing extrinsic LLRs (unscaled) between the decoders;
  * all word widths and the LLR quantisation;
  * the two-sweep full-block schedule;
  * depuncturing with zeros;
  * par_1 coming first in the puncturing pattern;
  * all handshakes and timings.
* The paper's decoder diagram takes the final output straight from the second SISO decoder, in
  interleaved order. Here each decision is stored at pi(k), so the block leaves in natural order.
* The paper labels the three codes with "memory element" counts of 3, 4 and 5. Their polynomials
  have 3, 4 and 6 bits, so the codes have 2, 3 and 5 register stages. `M` counts the stages.
* Block length 5000, which the paper also evaluates, and the codes (7, 5) and (71, 52, 0) need a
  different parameter setting. They are not run-time options.

## Simulating and changing it

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. The reference models are in `tb/turbo_ref_pkg.sv`. With
Verilator 5:

    verilator --binary --timing --assert --top-module tb_turbo_codec \
        -y rtl -y tb rtl/turbo_pkg.sv tb/turbo_ref_pkg.sv tb/tb_turbo_codec.sv
    ./obj_dir/Vtb_turbo_codec

The testbenches are:

* `tb_rsc_encoder`, `tb_qpp_interleaver`, `tb_puncturer`, `tb_turbo_encoder`,
  `tb_siso_logmap`, `tb_turbo_decoder`: unit tests at small sizes.
* `tb_turbo_codec`: encode, channel and decode at the default size, at both rates, with 1 and 6
  iterations. It counts that each mechanism occurred.
* `tb_ber_workloads`: the evaluated configurations, block lengths, rates and iteration counts,
  one block each.

To build another code, set `M`, `FB` and `FF` on `turbo_codec`, for example
`#(.M(5), .FB('o71), .FF('o52))`. Up to M = 7 is supported. To change the block length, set
`N` together with `F1`/`F2` values that form a permutation for that N; 31/90 works for 1000 and
5000. The word widths are in `turbo_pkg`. Widening `W_CH` or `W_EXT` needs a matching change to
the reference model's saturation limits.
