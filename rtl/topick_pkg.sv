// topick_pkg: sizes, number formats and shared types of the ToPick attention
// accelerator.
//
// Sizes that come from the paper: 16 PE lanes, 64-dimensional heads, 12-bit
// Q/K/V operands cut into three 4-bit chunks, a 32-entry Scoreboard whose
// entries hold a 24-bit partial score and a 32-bit partial exp, and a context
// of up to 2048 tokens. Number formats are this design's own choice:
//   score      : signed 24 bit, 8 fractional bits, natural-log units
//                (the host folds 1/sqrt(d_h) and the quantisation scales into
//                q_t so that (q.k) >>> SCORE_SHIFT is already in this format)
//   exp value  : unsigned 32 bit, 16 fractional bits (Q16.16)
//   denominator: unsigned 48 bit, 16 fractional bits
//   probability: signed 12 bit, 11 fractional bits (Q1.11)
package topick_pkg;
  localparam int N_PL       = 16;   // PE lanes
  localparam int DIM        = 64;   // head dimension = multipliers per lane
  localparam int OP_W       = 12;   // Q/K/V operand width
  localparam int CHUNK_W    = 4;    // bits per K/V chunk
  localparam int N_CHUNK    = 3;    // chunks per operand
  localparam int CIDX_W     = 2;    // chunk index width
  localparam int PROD_W     = 2*OP_W;                  // 24: signed 12x12 product
  localparam int DOT_W      = PROD_W + $clog2(DIM);    // 30: sum of 64 products
  localparam int SCORE_W    = 24;   // Scoreboard partial score width
  localparam int SCORE_SHIFT= DOT_W - SCORE_W;          // 6
  localparam int SFRAC      = 8;    // fractional bits of a score
  localparam int EXP_W      = 32;   // EXP unit output width
  localparam int EFRAC      = 16;   // fractional bits of an exp value
  localparam int DELTA_W    = EXP_W + 1;
  localparam int DEN_W      = 48;
  localparam int MAX_CTX    = 2048;
  localparam int GTOK_W     = $clog2(MAX_CTX);          // 11: global token index
  localparam int NTOK_W     = GTOK_W + 1;               // 12: token count
  localparam int TOK_W      = 10;   // Scoreboard token field (67-1-24-32)
  localparam int SB_ENTRIES = 32;
  localparam int P_W        = 12;   // probability operand, Q1.11
  localparam int PFRAC      = 11;
  localparam int O_W        = 32;   // per-lane o_t accumulator
  localparam int OT_W       = O_W + $clog2(N_PL);       // summed o_t
  localparam int CVEC_W     = DIM*CHUNK_W;              // 256-bit chunk vector
  localparam int ADDR_W     = 40;   // DRAM byte address

  typedef logic signed [OP_W-1:0]    op_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic        [EXP_W-1:0]   exp_t;
  typedef logic signed [DELTA_W-1:0] delta_t;
  typedef logic        [GTOK_W-1:0]  gtok_t;
  typedef logic        [CIDX_W-1:0]  cidx_t;

  // Attention steps: step 0 is q.k with pruning, step 1 is sum(p*v).
  typedef enum logic [1:0] {ST_IDLE, ST_STEP0, ST_STEP1, ST_DONE} step_e;

  // A chunk request from a lane: which token, which chunk, K or V.
  typedef struct packed {
    logic  valid;
    logic  is_v;
    gtok_t tok;
    cidx_t chunk;
  } chunk_req_t;

  // A chunk returned to a lane: tag plus 64 x 4-bit chunk elements.
  typedef struct packed {
    logic              valid;
    logic              is_v;
    gtok_t             tok;
    cidx_t             chunk;
    logic [CVEC_W-1:0] data;
  } chunk_resp_t;

  // A request to the memory controller: the chunk tag plus its byte address.
  typedef struct packed {
    logic              valid;
    logic              is_v;
    gtok_t             tok;
    cidx_t             chunk;
    logic [ADDR_W-1:0] addr;
  } mem_req_t;

  // Saturate a wide signed value to the score width.
  function automatic score_t sat_score(input logic signed [SCORE_W+7:0] v);
    if (v > $signed({{8{1'b0}}, 1'b0, {(SCORE_W-1){1'b1}}}))
      return {1'b0, {(SCORE_W-1){1'b1}}};
    else if (v < $signed({{8{1'b1}}, 1'b1, {(SCORE_W-1){1'b0}}}))
      return {1'b1, {(SCORE_W-1){1'b0}}};
    else
      return v[SCORE_W-1:0];
  endfunction
endpackage
