// operand_buffer: the 512-byte operand buffer that holds the query q_t during
// an attention operation.
//
// The host writes it 32 bits at a time (wr_en, wr_addr, wr_data). The first
// 768 bits hold q_t: element d occupies bits 12d+11 .. 12d of the buffer image
// and is read continuously on q[d] by the MUX network and the Margin
// Generator. A write is visible on q the cycle after it is taken. The size
// (512 B) is the paper's; the write port and the packing are this design's.
module operand_buffer
  import topick_pkg::*;
#(
  parameter int BYTES  = 512,
  parameter int WORD_W = 32
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic [$clog2(BYTES*8/WORD_W)-1:0] wr_addr,
  input  logic [WORD_W-1:0]                 wr_data,
  output op_t                               q [DIM]
);
  localparam int WORDS = BYTES * 8 / WORD_W;
  logic [WORD_W-1:0] mem [WORDS];
  logic [WORDS*WORD_W-1:0] image;

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  always_comb begin
    for (int w = 0; w < WORDS; w++)
      image[w*WORD_W +: WORD_W] = mem[w];
    for (int d = 0; d < DIM; d++)
      q[d] = op_t'(image[d*OP_W +: OP_W]);
  end
endmodule
