// puncturer: turns the two parity streams of the rate-1/3 turbo code into the single parity
// stream of rate 1/2 by keeping par_1 and par_2 alternately.
//
// A phase bit starts at 0 with `clear` (start of a block) and toggles on every valid bit: bit 0
// of a block sends par_1, bit 1 par_2, bit 2 par_1, and so on. The paper says the two parity
// sequences "get punctured alternatively"; which one goes first is this design's choice.
// The output is combinational from the inputs and the phase, for the bit presented with `valid`.
module puncturer (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic valid,
  input  logic par1,
  input  logic par2,
  output logic par,
  output logic sel_par2   // 1 when `par` carries par_2
);

  logic phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      phase <= 1'b0;
    else if (clear)  phase <= 1'b0;
    else if (valid)  phase <= ~phase;
  end

  assign sel_par2 = phase;
  assign par      = phase ? par2 : par1;

endmodule
