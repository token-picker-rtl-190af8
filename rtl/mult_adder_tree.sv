// mult_adder_tree: the 64 multipliers and the adder tree of one PE lane,
// with the bit-width (BW) aligner in front of them.
//
// The aligner places a 4-bit chunk at its position in the 12-bit operand:
// chunk 0 holds bits 11..8 including the sign and is sign-extended, chunks 1
// and 2 hold bits 7..4 and 3..0 and are zero-extended; unknown lower bits are
// zero. Each multiplier forms a[d] * aligned[d] (12 x 12 bit signed). In
// step 0 the adder tree sums the 64 products into the partial dot product
// ps_i^b = q_t . k_i^b; in step 1 the lane uses the element products
// p_i * v_i^b directly for its per-dimension accumulators. Combinational.
// Sizes follow the paper (64 x 12-12 bit multipliers, 4-bit chunks); the
// aligner's exact behaviour is this design's reading of the figure.
module mult_adder_tree
  import topick_pkg::*;
(
  input  cidx_t                    chunk_idx,
  input  op_t                      a     [DIM],
  input  logic [CHUNK_W-1:0]       b_chunk [DIM],
  output logic signed [DOT_W-1:0]  dot,
  output logic signed [PROD_W-1:0] prod  [DIM]
);
  op_t aligned [DIM];

  always_comb begin
    dot = '0;
    for (int d = 0; d < DIM; d++) begin
      unique case (chunk_idx)
        2'd0:    aligned[d] = op_t'({b_chunk[d], 8'd0});
        2'd1:    aligned[d] = op_t'({4'd0, b_chunk[d], 4'd0});
        default: aligned[d] = op_t'({8'd0, b_chunk[d]});
      endcase
      prod[d] = PROD_W'(a[d]) * PROD_W'(aligned[d]);
      dot    += DOT_W'(prod[d]);
    end
  end
endmodule
