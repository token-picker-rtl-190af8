// mux_network: configures the datapath of every PE lane for the current step
// and phase.
//
// Operand A of a lane's multipliers is the query q_t in step 0 (dot products)
// and that lane's probability p_i, broadcast to all 64 multipliers, in step 1
// (weighted sum of V). The chunk stream of a lane comes from DRAM in the
// generation phase and from the lane's on-chip K/V buffer in the prompt phase
// (prompt_mode). Combinational. The paper names the MUX network and its
// inputs; this per-lane two-way selection is this design's implementation.
module mux_network
  import topick_pkg::*;
#(
  parameter int NLANES = N_PL
) (
  input  logic           step,          // 0: q.k, 1: p*v
  input  logic           prompt_mode,
  input  op_t            q         [DIM],
  input  logic [P_W-1:0] p         [NLANES],
  input  chunk_resp_t    dram_resp [NLANES],
  input  chunk_resp_t    sram_resp [NLANES],
  output op_t            lane_a    [NLANES][DIM],
  output chunk_resp_t    lane_resp [NLANES]
);
  always_comb begin
    for (int l = 0; l < NLANES; l++) begin
      lane_resp[l] = prompt_mode ? sram_resp[l] : dram_resp[l];
      for (int d = 0; d < DIM; d++)
        lane_a[l][d] = step ? op_t'(p[l]) : q[d];
    end
  end
endmodule
