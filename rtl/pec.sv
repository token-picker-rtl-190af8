// pec: Partial Exp Calculator of a PE lane.
//
// It turns the new partial score into the token's contribution to the
// softmax denominator, exp(s_i^b + M_min^b) (the smallest exp the unknown
// bits allow), or 0 if the RPDU pruned the token, and subtracts the
// contribution recorded for the previous chunk (prev_exp, 0 for the first
// chunk). The signed difference, Delta Partial Exp, goes to the Denominator
// Aggregation Module, so that the denominator always holds exactly one
// lower-bound term per live token. cur_exp is what the Scoreboard keeps.
// Combinational, one EXP unit. The structure (adder, exp, 0/1 mux on pruned,
// subtractor) follows the paper's figure; saturation of s + M_min is this
// design's.
module pec
  import topick_pkg::*;
(
  input  score_t score,
  input  score_t m_min,
  input  logic   pruned,
  input  exp_t   prev_exp,
  output exp_t   cur_exp,
  output delta_t delta
);
  score_t s_min;
  exp_t   e;

  exp_unit u_exp (.x(s_min), .y(e));

  always_comb begin
    s_min   = sat_score((SCORE_W+8)'(score) + (SCORE_W+8)'(m_min));
    cur_exp = pruned ? '0 : e;
    delta   = $signed({1'b0, cur_exp}) - $signed({1'b0, prev_exp});
  end
endmodule
