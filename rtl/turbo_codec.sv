// turbo_codec: turbo encoder and iterative Log-MAP turbo decoder of one turbo code.
//
// The transmit side (turbo_encoder) takes blocks of N information bits and produces the
// systematic bit, the two RSC parities and the punctured parity for each of them. The receive
// side (turbo_decoder) takes the channel LLRs of a received block and returns the decoded bits.
// Between the two lies the transmission channel (BPSK over AWGN in the paper), which is not part
// of the hardware: the coded bits leave on the enc_* ports and the soft received values enter on
// the dec_* ports. Both sides share the code configuration (M, FB, FF), the block length N and
// the interleaver (F1, F2). `rate_half` chooses how the decoder reads the received parity:
// rate 1/3 (par_1 and par_2) or rate 1/2 (the punctured stream on dec_p1).
// The defaults are the paper's main settings: configuration (15, 12, 0), block length 1000;
// 6 iterations are chosen at run time with num_iter. Timing is that of the two sub-blocks.
module turbo_codec
  import turbo_pkg::*;
#(
  parameter int             N  = 1000,
  parameter int             M  = 3,
  parameter logic [MAX_M:0] FB = 'o15,
  parameter logic [MAX_M:0] FF = 'o12,
  parameter int             F1 = 31,
  parameter int             F2 = 90
) (
  input  logic       clk,
  input  logic       rst_n,
  // encoder: information bits in
  input  logic       enc_in_valid,
  input  logic       enc_in_bit,
  output logic       enc_in_ready,
  // encoder: coded bits out
  output logic       enc_out_valid,
  output logic       enc_out_last,
  output logic       enc_out_sys,
  output logic       enc_out_par1,
  output logic       enc_out_par2,
  output logic       enc_out_par,
  // decoder configuration
  input  logic       rate_half,
  input  logic [3:0] num_iter,
  // decoder: received LLRs in
  input  logic       dec_in_valid,
  input  ch_llr_t    dec_in_sys,
  input  ch_llr_t    dec_in_p1,
  input  ch_llr_t    dec_in_p2,
  output logic       dec_in_ready,
  // decoder: decoded bits out
  output logic       dec_out_valid,
  output logic       dec_out_bit,
  output logic       dec_out_last,
  output logic       dec_iter_done
);

  turbo_encoder #(.N(N), .M(M), .FB(FB), .FF(FF), .F1(F1), .F2(F2)) u_enc (
    .clk, .rst_n,
    .in_valid(enc_in_valid), .in_bit(enc_in_bit), .in_ready(enc_in_ready),
    .out_valid(enc_out_valid), .out_last(enc_out_last), .out_sys(enc_out_sys),
    .out_par1(enc_out_par1), .out_par2(enc_out_par2), .out_par(enc_out_par)
  );

  turbo_decoder #(.N(N), .M(M), .FB(FB), .FF(FF), .F1(F1), .F2(F2)) u_dec (
    .clk, .rst_n, .rate_half, .num_iter,
    .in_valid(dec_in_valid), .in_sys(dec_in_sys), .in_p1(dec_in_p1), .in_p2(dec_in_p2),
    .in_ready(dec_in_ready),
    .out_valid(dec_out_valid), .out_bit(dec_out_bit), .out_last(dec_out_last),
    .iter_done(dec_iter_done)
  );

endmodule
