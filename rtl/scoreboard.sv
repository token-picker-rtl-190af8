// scoreboard: per-lane store of the partial results of tokens whose next K
// chunk has been requested but not yet returned.
//
// 32 entries of 67 bits: valid (1), token index (10), partial score s_i^b
// (24) and partial exp exp(s_i,min^b) (32). The lane stores the lane-local
// token index i / N_PL in the 10-bit field. Lookup is associative on the
// token index (lk_tok) and combinational, so the previous partial score is
// available in the cycle the next chunk is processed. On a clock edge with
// wr_en the entry of lk_tok is updated, or a free entry (lowest index) is
// allocated if there is none; with rm_en the entry of lk_tok is invalidated.
// The lane keeps at most 32 tokens in flight, so a write never finds the
// table full (checked by an assertion). Entry count and field widths follow
// the paper; the associative organisation is this design's choice.
module scoreboard
  import topick_pkg::*;
#(
  parameter int ENTRIES = SB_ENTRIES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [TOK_W-1:0]             lk_tok,
  output logic                         lk_hit,
  output score_t                       lk_score,
  output exp_t                         lk_exp,
  input  logic                         wr_en,
  input  score_t                       wr_score,
  input  exp_t                         wr_exp,
  input  logic                         rm_en,
  output logic [$clog2(ENTRIES):0]     count
);
  typedef struct packed {
    logic             v;
    logic [TOK_W-1:0] tok;
    score_t           score;
    exp_t             pexp;
  } sb_entry_t;  // 67 bits

  sb_entry_t                     tab [ENTRIES];
  logic [$clog2(ENTRIES)-1:0]    hit_idx, free_idx;
  logic                          has_free;

  always_comb begin
    lk_hit   = 1'b0;
    hit_idx  = '0;
    has_free = 1'b0;
    free_idx = '0;
    count    = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (tab[e].v && tab[e].tok == lk_tok) begin
        lk_hit  = 1'b1;
        hit_idx = $clog2(ENTRIES)'(e);
      end
      if (!tab[e].v) begin
        has_free = 1'b1;
        free_idx = $clog2(ENTRIES)'(e);
      end
      count += ($clog2(ENTRIES)+1)'(tab[e].v);
    end
    lk_score = tab[hit_idx].score;
    lk_exp   = tab[hit_idx].pexp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab[e] <= '0;
    end else if (clear) begin
      for (int e = 0; e < ENTRIES; e++) tab[e].v <= 1'b0;
    end else if (wr_en) begin
      if (lk_hit) tab[hit_idx] <= '{v: 1'b1, tok: lk_tok, score: wr_score, pexp: wr_exp};
      else        tab[free_idx] <= '{v: 1'b1, tok: lk_tok, score: wr_score, pexp: wr_exp};
    end else if (rm_en && lk_hit) begin
      tab[hit_idx].v <= 1'b0;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (wr_en && !clear && !lk_hit) |-> has_free);
endmodule
