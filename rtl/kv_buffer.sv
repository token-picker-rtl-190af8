// kv_buffer: one PE lane's slice of the on-chip Key and Value buffers.
//
// The two 192 KB buffers are split evenly over the 16 lanes: each lane holds
// 128 tokens x 3 chunks x 256 bits (12 KB) of K and as much of V. A word is
// one chunk vector (64 elements x 4 bits) at address local_token*3 + chunk.
// In the prompt phase the host preloads the buffers through the write port
// and the lane's chunk requests are served here instead of by DRAM: a read
// issued in cycle n returns data and its tag in cycle n+1. Written as plain
// arrays; the SRAM macros, their banking and the fill path are not modelled.
// The sizes follow the paper; the word organisation is this design's.
module kv_buffer
  import topick_pkg::*;
#(
  parameter int TOKENS = (192 * 1024) / N_PL / (DIM * OP_W / 8)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wr_en,
  input  logic                                 wr_is_v,
  input  logic [$clog2(TOKENS*N_CHUNK)-1:0]    wr_addr,
  input  logic [CVEC_W-1:0]                    wr_data,
  input  chunk_req_t                           rd_req,
  output chunk_resp_t                          rd_resp
);
  localparam int WORDS = TOKENS * N_CHUNK;
  localparam int AW    = $clog2(WORDS);
  logic [CVEC_W-1:0] kmem [WORDS];
  logic [CVEC_W-1:0] vmem [WORDS];
  logic [AW-1:0]     rd_addr;
  logic [CVEC_W-1:0] rd_data;
  chunk_req_t        rd_tag;

  always_comb
    rd_addr = AW'((32'(rd_req.tok) / N_PL) * N_CHUNK + 32'(rd_req.chunk));

  always_ff @(posedge clk) begin
    if (wr_en && !wr_is_v) kmem[wr_addr] <= wr_data;
    if (wr_en &&  wr_is_v) vmem[wr_addr] <= wr_data;
    rd_data <= rd_req.is_v ? vmem[rd_addr] : kmem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_tag <= '0;
    else        rd_tag <= rd_req;

  always_comb
    rd_resp = '{valid: rd_tag.valid, is_v: rd_tag.is_v, tok: rd_tag.tok,
                chunk: rd_tag.chunk, data: rd_data};
endmodule
