// rpdu: Request/Prune Decision Unit of a PE lane.
//
// For the chunk just processed it forms the upper-bound estimate of the
// token's log-probability, s_i^b + M_max^b - ln(denominator), and prunes the
// token when that is <= ln(thr): then even the largest score the unknown bits
// allow gives a probability below the threshold. A token that survives asks
// for its next chunk (req_next) unless this was its last chunk, in which case
// it is finished and kept (keep). A pruned or finished token frees the lane
// to request a new first chunk (req_first). Combinational. The decision rule
// is the paper's; signal names and the split into three outputs are this
// design's.
module rpdu
  import topick_pkg::*;
(
  input  logic   valid,
  input  score_t score,
  input  score_t m_max,
  input  score_t ln_den,
  input  score_t ln_thr,
  input  cidx_t  chunk_idx,
  output logic   prune,
  output logic   req_next,
  output logic   keep,
  output logic   req_first
);
  logic signed [SCORE_W+1:0] est;

  always_comb begin
    est       = (SCORE_W+2)'(score) + (SCORE_W+2)'(m_max) - (SCORE_W+2)'(ln_den);
    prune     = valid && (est <= (SCORE_W+2)'(ln_thr));
    req_next  = valid && !prune && (chunk_idx < cidx_t'(N_CHUNK - 1));
    keep      = valid && !prune && (chunk_idx == cidx_t'(N_CHUNK - 1));
    req_first = prune || keep;
  end
endmodule
