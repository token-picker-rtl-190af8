// margin_generator: builds the conservative-margin look-up table (CM LUT) of
// the query, once per attention operation, before step 0.
//
// When only the first b+1 chunks of a key element are known, its u = 4*(2-b)
// low bits are unknown and lie in [0, 2^u-1]. The dot product can then still
// grow by at most P*(2^u-1), where P is the sum of the positive query
// elements, and shrink by at most |N|*(2^u-1), where N is the sum of the
// negative ones. The unit therefore filters q by sign, adds each group with a
// 64-input adder, and stores for b = 0,1,2:
//   M_max[b] = ceil (P*(2^u-1) / 2^SCORE_SHIFT)
//   M_min[b] = floor(N*(2^u-1) / 2^SCORE_SHIFT)
// in the 24-bit score format (rounded outward so the bounds stay safe).
// The sign filter, adder and LUT follow the paper's figure; the scaling to the
// score format is this design's. Timing: the LUT is written on the clock edge
// where load is high and read continuously.
module margin_generator
  import topick_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  op_t    q     [DIM],
  output score_t m_min [N_CHUNK],
  output score_t m_max [N_CHUNK]
);
  localparam int SUM_W = OP_W + $clog2(DIM) + 1;  // 19

  logic signed [SUM_W-1:0] pos_sum, neg_sum;
  logic signed [DOT_W:0]   full_max [N_CHUNK];
  logic signed [DOT_W:0]   full_min [N_CHUNK];

  // Sign filtering and the two adder trees.
  always_comb begin
    pos_sum = '0;
    neg_sum = '0;
    for (int d = 0; d < DIM; d++) begin
      if (q[d] > 0) pos_sum += SUM_W'(q[d]);
      else          neg_sum += SUM_W'(q[d]);
    end
    for (int b = 0; b < N_CHUNK; b++) begin
      // x*(2^u-1) = (x << u) - x
      full_max[b] = ((DOT_W+1)'(pos_sum) <<< (CHUNK_W*(N_CHUNK-1-b))) - (DOT_W+1)'(pos_sum);
      full_min[b] = ((DOT_W+1)'(neg_sum) <<< (CHUNK_W*(N_CHUNK-1-b))) - (DOT_W+1)'(neg_sum);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_CHUNK; b++) begin
        m_min[b] <= '0;
        m_max[b] <= '0;
      end
    end else if (load) begin
      for (int b = 0; b < N_CHUNK; b++) begin
        m_max[b] <= score_t'((full_max[b] + (DOT_W+1)'((1 << SCORE_SHIFT) - 1)) >>> SCORE_SHIFT);
        m_min[b] <= score_t'(full_min[b] >>> SCORE_SHIFT);
      end
    end
  end
endmodule
