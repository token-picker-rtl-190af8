// pe_lane: one of the 16 PE lanes. Lane L owns the tokens i with
// i mod 16 = L and computes, for them, the pruned scores (step 0) and its
// share of the attention output (step 1).
//
// Step 0, out-of-order score calculation. The lane requests the first (MSB)
// chunk of its tokens, token 0 first (lane 0 only) and then from the newest
// token backwards, one request per cycle. Each returned chunk, whatever its
// token and chunk index, is processed in one cycle:
//   ps   = q_t . k_i^b                    (multipliers, aligner, adder tree)
//   s^b  = s^{b-1} + ps >>> 6             (s^{b-1} from the Scoreboard)
//   RPDU : prune if s^b + M_max^b - ln(den) <= ln(thr)
//   PEC  : Delta = (pruned ? 0 : exp(s^b + M_min^b)) - exp(s^{b-1}_min)
// A surviving token stores (s^b, exp) in the Scoreboard and requests its
// next chunk; a pruned token is dropped; a token that survives its last chunk
// goes to the Probability Generator. Whenever the processed chunk does not
// need the request slot, the lane requests a new first chunk, so the
// multipliers keep working while downstream chunks are in flight. At most 32
// tokens are in flight (requested and not yet finished), so the Scoreboard
// never overflows; a lane that hits the limit stalls its first-chunk
// requests (counted in cnt_stall).
// Step 1 (run1 high): the Probability Generator turns each kept score into
// p_i and requests the three V chunks; each returned V chunk is multiplied
// by p_i and added to the 64 per-dimension accumulators o_acc (11 fractional
// bits).
// Timing: resp is registered on entry; a request appears on req the cycle
// after the chunk that caused it was registered. delta is combinational
// from the registered response. The per-lane token order, the one-request-
// per-cycle rule and the in-flight limit are this design's choices; the
// datapath follows the paper.
module pe_lane
  import topick_pkg::*;
#(
  parameter int LANE = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,       // pulse: clear and begin step 0
  input  logic                     run1,        // step 1 in progress
  input  logic [NTOK_W-1:0]        n_tok,
  input  score_t                   ln_thr,
  input  score_t                   ln_den,
  input  score_t                   m_min [N_CHUNK],
  input  score_t                   m_max [N_CHUNK],
  input  op_t                      a     [DIM],
  input  chunk_resp_t              resp,
  output chunk_req_t               req,
  output delta_t                   delta,
  output logic [P_W-1:0]           p,
  output logic signed [O_W-1:0]    o_acc [DIM],
  output logic                     done0,
  output logic                     done1,
  output logic [15:0]              cnt_prune,
  output logic [15:0]              cnt_keep,
  output logic [15:0]              cnt_stall
);
  localparam int LTOK_W = GTOK_W - $clog2(N_PL) + 1;  // local count width

  chunk_resp_t r;                  // registered response
  logic        active;
  logic [LTOK_W-1:0] n_own, issued;
  logic [$clog2(SB_ENTRIES):0] in_flight;

  // datapath
  logic [CHUNK_W-1:0]        bch [DIM];
  logic signed [DOT_W-1:0]   dot;
  logic signed [PROD_W-1:0]  prod [DIM];
  logic                      kv, vv;
  logic                      sb_hit;
  score_t                    sb_score, prev_score, s_new;
  exp_t                      sb_exp, prev_exp, cur_exp;
  delta_t                    pec_delta;
  logic                      prune, req_next, keep, req_first;
  logic [$clog2(SB_ENTRIES):0] sb_count;
  logic                      first_ok, stall;
  logic [LTOK_W-1:0]         next_local;
  gtok_t                     next_tok;
  logic [$clog2(SB_ENTRIES):0] base_flight;

  chunk_req_t                pg_req;
  logic                      pg_pvalid, pg_idle, pg_pop;
  gtok_t                     pg_ptok;

  always_comb
    for (int d = 0; d < DIM; d++) bch[d] = r.data[d*CHUNK_W +: CHUNK_W];

  mult_adder_tree u_mat (.chunk_idx(r.chunk), .a(a), .b_chunk(bch), .dot(dot), .prod(prod));

  scoreboard u_sb (
    .clk, .rst_n, .clear(start),
    .lk_tok(TOK_W'(32'(r.tok) / N_PL)), .lk_hit(sb_hit), .lk_score(sb_score), .lk_exp(sb_exp),
    .wr_en(req_next), .wr_score(s_new), .wr_exp(cur_exp),
    .rm_en(kv && (prune || keep)), .count(sb_count)
  );

  rpdu u_rpdu (
    .valid(kv), .score(s_new), .m_max(m_max[r.chunk]), .ln_den, .ln_thr,
    .chunk_idx(r.chunk), .prune, .req_next, .keep, .req_first
  );

  pec u_pec (
    .score(s_new), .m_min(m_min[r.chunk]), .pruned(prune), .prev_exp,
    .cur_exp, .delta(pec_delta)
  );

  prob_gen u_pg (
    .clk, .rst_n, .clear(start),
    .push(keep), .push_tok(r.tok), .push_score(s_new),
    .run(run1), .ln_den, .req(pg_req),
    .p_valid(pg_pvalid), .p_tok(pg_ptok), .p, .pop(pg_pop), .idle(pg_idle)
  );

  always_comb begin
    kv         = r.valid && !r.is_v;
    vv         = r.valid &&  r.is_v;
    prev_score = (r.chunk == '0 || !sb_hit) ? '0 : sb_score;
    prev_exp   = (r.chunk == '0 || !sb_hit) ? '0 : sb_exp;
    s_new      = sat_score((SCORE_W+8)'(prev_score) + (SCORE_W+8)'(dot >>> SCORE_SHIFT));
    delta      = kv ? pec_delta : '0;
    pg_pop     = vv && (r.chunk == cidx_t'(N_CHUNK - 1));

    // next first-chunk token: token 0 first on lane 0, then newest to oldest
    if (LANE == 0) next_local = (issued == '0) ? '0 : n_own - issued;
    else           next_local = n_own - 1'b1 - issued;
    next_tok    = GTOK_W'(32'(next_local) * N_PL + LANE);
    base_flight = in_flight - ($clog2(SB_ENTRIES)+1)'(req_first);
    first_ok    = active && !run1 && (issued < n_own) && !req_next &&
                  (base_flight < ($clog2(SB_ENTRIES)+1)'(SB_ENTRIES));
    stall       = active && !run1 && (issued < n_own) && !req_next && !first_ok;
    done0       = active && (issued == n_own) && (in_flight == '0) && !r.valid && !req.valid;
    done1       = done0 && pg_idle && !r.valid && !req.valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; req <= '0; active <= 1'b0; n_own <= '0; issued <= '0; in_flight <= '0;
      cnt_prune <= '0; cnt_keep <= '0; cnt_stall <= '0;
      for (int d = 0; d < DIM; d++) o_acc[d] <= '0;
    end else if (start) begin
      r <= '0; req <= '0; active <= 1'b1; issued <= '0; in_flight <= '0;
      n_own <= (n_tok > NTOK_W'(LANE)) ? LTOK_W'(((n_tok - NTOK_W'(1) - NTOK_W'(LANE)) / NTOK_W'(N_PL)) + NTOK_W'(1)) : '0;
      cnt_prune <= '0; cnt_keep <= '0; cnt_stall <= '0;
      for (int d = 0; d < DIM; d++) o_acc[d] <= '0;
    end else begin
      r <= resp;
      // request port
      if (run1)          req <= pg_req;
      else if (req_next) req <= '{valid: 1'b1, is_v: 1'b0, tok: r.tok, chunk: r.chunk + 1'b1};
      else if (first_ok) req <= '{valid: 1'b1, is_v: 1'b0, tok: next_tok, chunk: '0};
      else               req <= '0;
      if (first_ok) issued <= issued + 1'b1;
      in_flight <= in_flight + ($clog2(SB_ENTRIES)+1)'(first_ok) - ($clog2(SB_ENTRIES)+1)'(req_first);
      if (prune) cnt_prune <= cnt_prune + 1'b1;
      if (keep)  cnt_keep  <= cnt_keep + 1'b1;
      if (stall) cnt_stall <= cnt_stall + 1'b1;
      if (vv)
        for (int d = 0; d < DIM; d++) o_acc[d] <= o_acc[d] + O_W'(prod[d]);
    end
  end

  a_v_in_order: assert property (@(posedge clk) disable iff (!rst_n || start)
    vv |-> (pg_pvalid && pg_ptok == r.tok));
  a_sb_bound: assert property (@(posedge clk) disable iff (!rst_n || start)
    sb_count <= in_flight);
  a_k_chunk_has_entry: assert property (@(posedge clk) disable iff (!rst_n || start)
    (kv && r.chunk != '0) |-> sb_hit);
endmodule
