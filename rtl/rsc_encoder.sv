// rsc_encoder: recursive systematic convolutional (RSC) encoder, one of the two constituent
// encoders of the turbo encoder.
//
// M memory elements form a shift register. Each enabled cycle the feedback bit
// w = u xor (taps of FB on the register) enters the register, and the parity bit
// par = (FF tap 0 and w) xor (taps of FF on the register) is produced. The systematic bit is the
// input itself and is not repeated here. FB and FF are written in octal as the paper names its
// configurations, most significant of the M+1 bits being the D^0 coefficient; the defaults are
// configuration (15, 12, 0), M = 3. The first number is taken as the feedback polynomial.
//
// Interface: `clear` returns the register to the all-zero state (start of a block), `en`
// advances it by one bit. `par` is combinational from `u` and the current state, so it belongs
// to the bit presented in the same cycle as `en`. `state` is the register, bit 0 most recent.
module rsc_encoder
  import turbo_pkg::*;
#(
  parameter int              M  = 3,
  parameter logic [MAX_M:0]  FB = 'o15,
  parameter logic [MAX_M:0]  FF = 'o12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  input  logic         u,
  output logic         par,
  output logic [M-1:0] state
);

  logic [M-1:0] sr;       // sr[i-1] holds the feedback bit of i cycles ago
  logic         w;

  always_comb begin
    w = u;
    for (int i = 1; i <= M; i++) w ^= FB[M-i] & sr[i-1];
    par = FF[M] & w;
    for (int i = 1; i <= M; i++) par ^= FF[M-i] & sr[i-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sr <= '0;
    else if (clear)  sr <= '0;
    else if (en)     sr <= M'({sr, w});
  end

  assign state = sr;

  initial assert (M >= 1 && M <= MAX_M) else $fatal(1, "rsc_encoder: M out of range");

endmodule
