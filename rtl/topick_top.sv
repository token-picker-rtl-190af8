// topick_top: the ToPick self-attention accelerator for one head.
//
// Blocks: the 512 B operand buffer (q_t), the Margin Generator (CM LUT), the
// controller, the MUX network, 16 PE lanes each with its slice of the on-chip
// K/V buffer, and the Denominator Aggregation Module. One operation computes
// o_t = sum_i p_i v_i over the tokens 0..n_tok-1, pruning every token whose
// estimated probability bound falls below thr (given as ln_thr in the score
// format). Use: write q_t through the operand-buffer port (and, for the prompt
// phase, K/V through the buffer port), set n_tok, ln_thr and prompt_mode,
// pulse start, and wait for done. In the generation phase the design issues
// up to one chunk request per lane per cycle on mem_req and expects the
// chunk, with the same tag, on mem_resp some cycles later, V chunks of a lane
// in request order. o_t is the sum of the lanes' accumulators (11 fractional
// bits); den is the softmax denominator of the kept tokens. The cross-lane
// o_t adder is this design's; the block structure follows the paper.
module topick_top
  import topick_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // operand buffer write port
  input  logic                    opb_wr_en,
  input  logic [6:0]              opb_wr_addr,
  input  logic [31:0]             opb_wr_data,
  // on-chip K/V buffer write port (one enable per lane)
  input  logic [N_PL-1:0]         kvb_wr_en,
  input  logic                    kvb_wr_is_v,
  input  logic [8:0]              kvb_wr_addr,
  input  logic [CVEC_W-1:0]       kvb_wr_data,
  // operation
  input  logic                    start,
  input  logic                    prompt_mode,
  input  logic [NTOK_W-1:0]       n_tok,
  input  score_t                  ln_thr,
  output logic                    busy,
  output logic                    done,
  // memory controller
  output mem_req_t                mem_req  [N_PL],
  input  chunk_resp_t             mem_resp [N_PL],
  // results
  output logic signed [OT_W-1:0]  o_t [DIM],
  output logic [DEN_W-1:0]        den,
  output logic [31:0]             k_chunks,
  output logic [31:0]             v_chunks,
  output logic [31:0]             cycles,
  output logic [31:0]             n_pruned,
  output logic [31:0]             n_kept,
  output logic [31:0]             n_stall
);
  op_t            q [DIM];
  score_t         m_min [N_CHUNK], m_max [N_CHUNK];
  score_t         ln_den;
  logic           lane_start, margin_load, run1, step;
  logic           done0 [N_PL], done1 [N_PL];
  chunk_req_t     lane_req [N_PL], sram_req [N_PL];
  chunk_resp_t    sram_resp [N_PL], lane_resp [N_PL];
  logic [P_W-1:0] p [N_PL];
  op_t            lane_a [N_PL][DIM];
  delta_t         delta [N_PL];
  logic signed [O_W-1:0] o_acc [N_PL][DIM];
  logic [15:0]    c_prune [N_PL], c_keep [N_PL], c_stall [N_PL];

  operand_buffer u_opb (.clk, .wr_en(opb_wr_en), .wr_addr(opb_wr_addr), .wr_data(opb_wr_data), .q);

  margin_generator u_mg (.clk, .rst_n, .load(margin_load), .q, .m_min, .m_max);

  controller u_ctrl (
    .clk, .rst_n, .start, .prompt_mode,
    .lane_done0(done0), .lane_done1(done1), .lane_req, .mem_req, .sram_req,
    .lane_start, .margin_load, .run1, .step, .busy, .done, .k_chunks, .v_chunks, .cycles
  );

  mux_network u_mux (
    .step, .prompt_mode, .q, .p, .dram_resp(mem_resp), .sram_resp, .lane_a, .lane_resp
  );

  dag u_dag (.clk, .rst_n, .clear(lane_start), .delta, .den, .ln_den);

  for (genvar l = 0; l < N_PL; l++) begin : g_lane
    kv_buffer u_kvb (
      .clk, .rst_n, .wr_en(kvb_wr_en[l]), .wr_is_v(kvb_wr_is_v), .wr_addr(kvb_wr_addr),
      .wr_data(kvb_wr_data), .rd_req(sram_req[l]), .rd_resp(sram_resp[l])
    );
    pe_lane #(.LANE(l)) u_lane (
      .clk, .rst_n, .start(lane_start), .run1, .n_tok, .ln_thr, .ln_den, .m_min, .m_max,
      .a(lane_a[l]), .resp(lane_resp[l]), .req(lane_req[l]), .delta(delta[l]), .p(p[l]),
      .o_acc(o_acc[l]), .done0(done0[l]), .done1(done1[l]),
      .cnt_prune(c_prune[l]), .cnt_keep(c_keep[l]), .cnt_stall(c_stall[l])
    );
  end

  // cross-lane o_t adder and event totals
  always_comb begin
    n_pruned = '0;
    n_kept   = '0;
    n_stall  = '0;
    for (int d = 0; d < DIM; d++) o_t[d] = '0;
    for (int l = 0; l < N_PL; l++) begin
      for (int d = 0; d < DIM; d++) o_t[d] += OT_W'(o_acc[l][d]);
      n_pruned += 32'(c_prune[l]);
      n_kept   += 32'(c_keep[l]);
      n_stall  += 32'(c_stall[l]);
    end
  end
endmodule
