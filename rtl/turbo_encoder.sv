// turbo_encoder: rate-1/3 turbo encoder with an optional rate-1/2 punctured parity output.
//
// A block of N information bits is first written into a block buffer, one bit per `in_valid`
// cycle. The encoder then reads the buffer twice per cycle, at k and at pi(k) from the
// interleaver, and feeds the natural-order bit to the first RSC encoder and the interleaved bit
// to the second. Each cycle it emits the systematic bit `sys` (= the input bit k), the parities
// `par1` and `par2` of the two RSC encoders (rate 1/3, paper Fig. 1) and `par`, the output of the
// puncturer, which alternates par1 and par2 (rate 1/2, paper Fig. 2). Both rates come out
// together; the receiver uses sys+par1+par2 or sys+par.
//
// Both RSC encoders start each block in the all-zero state and are not terminated: the paper
// does not mention trellis termination, so no tail bits are sent. The whole block must be
// buffered before encoding because the interleaved bit pi(k) may lie anywhere in the block.
//
// Timing: `in_ready` is high while a block is being loaded. After the N-th bit the encoder needs
// one cycle to start, then outputs one coded bit triple per cycle for N cycles; `out_last`
// marks bit N-1. The first output appears 3 cycles after the last input bit. A new block may be
// loaded while the last two outputs of the previous one are still in the pipeline.
module turbo_encoder
  import turbo_pkg::*;
#(
  parameter int             N  = 1000,
  parameter int             M  = 3,
  parameter logic [MAX_M:0] FB = 'o15,
  parameter logic [MAX_M:0] FF = 'o12,
  parameter int             F1 = 31,
  parameter int             F2 = 90
) (
  input  logic clk,
  input  logic rst_n,
  // information bits
  input  logic in_valid,
  input  logic in_bit,
  output logic in_ready,
  // coded bits
  output logic out_valid,
  output logic out_last,
  output logic out_sys,
  output logic out_par1,
  output logic out_par2,
  output logic out_par
);

  localparam int AW = $clog2(N);

  typedef enum logic [1:0] {S_LOAD, S_START, S_ENC} state_t;
  state_t state;

  logic          buf_mem [N];
  logic [AW-1:0] wr_cnt;
  logic [AW-1:0] il_k, il_pi;
  logic          il_restart, il_step;

  // stage 1: bits read from the buffer
  logic s1_valid, s1_last, s1_u, s1_ui;
  logic first_clear;
  logic p1, p2, pp;

  assign in_ready   = (state == S_LOAD);
  assign il_restart = (state == S_START);
  assign il_step    = (state == S_ENC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      wr_cnt <= '0;
    end else begin
      case (state)
        S_LOAD:
          if (in_valid) begin
            if (wr_cnt == AW'(N - 1)) begin
              wr_cnt <= '0;
              state  <= S_START;
            end else begin
              wr_cnt <= wr_cnt + 1'b1;
            end
          end
        S_START: state <= S_ENC;
        S_ENC:   if (il_k == AW'(N - 1)) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  // block buffer: one write port, two read ports (natural and interleaved order)
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) buf_mem[wr_cnt] <= in_bit;
    s1_u  <= buf_mem[il_k];
    s1_ui <= buf_mem[il_pi];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
    end else begin
      s1_valid <= (state == S_ENC);
      s1_last  <= (state == S_ENC) && (il_k == AW'(N - 1));
    end
  end

  assign first_clear = (state == S_START);

  qpp_interleaver #(.N(N), .F1(F1), .F2(F2)) u_il (
    .clk, .rst_n, .restart(il_restart), .step_up(il_step), .step_down(1'b0),
    .k(il_k), .pi(il_pi)
  );

  rsc_encoder #(.M(M), .FB(FB), .FF(FF)) u_rsc1 (
    .clk, .rst_n, .clear(first_clear), .en(s1_valid), .u(s1_u), .par(p1), .state()
  );

  rsc_encoder #(.M(M), .FB(FB), .FF(FF)) u_rsc2 (
    .clk, .rst_n, .clear(first_clear), .en(s1_valid), .u(s1_ui), .par(p2), .state()
  );

  puncturer u_punct (
    .clk, .rst_n, .clear(first_clear), .valid(s1_valid), .par1(p1), .par2(p2),
    .par(pp), .sel_par2()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_sys   <= 1'b0;
      out_par1  <= 1'b0;
      out_par2  <= 1'b0;
      out_par   <= 1'b0;
    end else begin
      out_valid <= s1_valid;
      out_last  <= s1_last;
      out_sys   <= s1_u;
      out_par1  <= p1;
      out_par2  <= p2;
      out_par   <= pp;
    end
  end

endmodule
