// prob_gen: Probability Generator of a PE lane (softmax and V requests for
// the tokens that survived step 0).
//
// During step 0 every token that finishes unpruned is pushed, with its final
// score, into a FIFO. When step 1 starts (run high) the generator pops one
// token at a time, computes p_i = exp(s_i - ln(denominator)) with its EXP
// unit, converts it to the 12-bit Q1.11 multiplier operand (saturating just
// below 1.0), and issues the three V chunk requests of that token on three
// consecutive cycles. (token, p_i) is queued until the lane has consumed the
// token's last V chunk (pop); the head of that queue drives p, which the MUX
// network broadcasts to the multipliers. Memory must return V chunks of a
// lane in request order. idle is high when nothing is left to do. FIFO depth
// (128 = 2048 tokens / 16 lanes), p format and queue depth are this design's.
module prob_gen
  import topick_pkg::*;
#(
  parameter int DEPTH  = MAX_CTX / N_PL,
  parameter int PDEPTH = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           push,
  input  gtok_t          push_tok,
  input  score_t         push_score,
  input  logic           run,
  input  score_t         ln_den,
  output chunk_req_t     req,
  output logic           p_valid,
  output gtok_t          p_tok,
  output logic [P_W-1:0] p,
  input  logic           pop,
  output logic           idle
);
  // ---- token FIFO (index, score) ----
  gtok_t  f_tok   [DEPTH];
  score_t f_score [DEPTH];
  logic [$clog2(DEPTH):0]   f_cnt;
  logic [$clog2(DEPTH)-1:0] f_rd, f_wr;
  // ---- p queue ----
  gtok_t          q_tok [PDEPTH];
  logic [P_W-1:0] q_p   [PDEPTH];
  logic [$clog2(PDEPTH):0]   q_cnt;
  logic [$clog2(PDEPTH)-1:0] q_rd, q_wr;
  // ---- request sequencer ----
  logic  seq_busy;
  cidx_t seq_chunk;
  gtok_t seq_tok;

  score_t x;
  exp_t   e;
  logic   take;

  exp_unit u_exp (.x(x), .y(e));

  always_comb begin
    x    = sat_score((SCORE_W+8)'(f_score[f_rd]) - (SCORE_W+8)'(ln_den));
    take = run && !seq_busy && (f_cnt != 0) && (q_cnt < ($clog2(PDEPTH)+1)'(PDEPTH)) ;
    req.valid = seq_busy;
    req.is_v  = 1'b1;
    req.tok   = seq_tok;
    req.chunk = seq_chunk;
    p_valid   = (q_cnt != 0);
    p_tok     = q_tok[q_rd];
    p         = q_p[q_rd];
    idle      = (f_cnt == 0) && (q_cnt == 0) && !seq_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_cnt <= '0; f_rd <= '0; f_wr <= '0;
      q_cnt <= '0; q_rd <= '0; q_wr <= '0;
      seq_busy <= 1'b0; seq_chunk <= '0; seq_tok <= '0;
    end else if (clear) begin
      f_cnt <= '0; f_rd <= '0; f_wr <= '0;
      q_cnt <= '0; q_rd <= '0; q_wr <= '0;
      seq_busy <= 1'b0; seq_chunk <= '0;
    end else begin
      if (push) begin
        f_tok[f_wr]   <= push_tok;
        f_score[f_wr] <= push_score;
        f_wr          <= f_wr + 1'b1;
      end
      if (take) f_rd <= f_rd + 1'b1;
      f_cnt <= f_cnt + (($clog2(DEPTH)+1)'(push)) - (($clog2(DEPTH)+1)'(take));

      if (take) begin
        q_tok[q_wr] <= f_tok[f_rd];
        // Q16.16 -> Q1.11, saturate at 2047/2048
        q_p[q_wr]   <= (e[EXP_W-1:EFRAC-PFRAC] > 27'd2047) ? P_W'(2047)
                                                           : P_W'(e >> (EFRAC - PFRAC));
        q_wr        <= q_wr + 1'b1;
        seq_busy    <= 1'b1;
        seq_tok     <= f_tok[f_rd];
        seq_chunk   <= '0;
      end else if (seq_busy) begin
        if (seq_chunk == cidx_t'(N_CHUNK - 1)) seq_busy <= 1'b0;
        else                                   seq_chunk <= seq_chunk + 1'b1;
      end
      if (pop) q_rd <= q_rd + 1'b1;
      q_cnt <= q_cnt + (($clog2(PDEPTH)+1)'(take)) - (($clog2(PDEPTH)+1)'(pop));
    end
  end

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (f_cnt < ($clog2(DEPTH)+1)'(DEPTH)) || take);
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> p_valid);
endmodule
