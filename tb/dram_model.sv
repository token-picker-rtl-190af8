// dram_model: behavioural stand-in for the HBM2 main memory and its
// controller, for simulation only (not synthesizable by intent).
//
// Every lane has its own request/response channel. A request accepted in
// cycle n returns its chunk, with the request's tag, in cycle n + lat, so
// each lane's responses come back in request order, one per cycle at most.
// lat can be changed between operations. The K and V contents live in the
// arrays kmem/vmem (one signed 12-bit element per token and dimension),
// which the testbench fills directly. Chunk b of an element is its bits
// 11-4b .. 8-4b. It also counts the chunks it served.
module dram_model
  import topick_pkg::*;
#(
  parameter int MAXLAT = 64
) (
  input  logic        clk,
  input  int          lat,
  input  mem_req_t    req  [N_PL],
  output chunk_resp_t resp [N_PL]
);
  logic [OP_W-1:0] kmem [MAX_CTX][DIM];
  logic [OP_W-1:0] vmem [MAX_CTX][DIM];
  mem_req_t        pipe [N_PL][MAXLAT];
  int              served;

  initial begin
    served = 0;
    for (int l = 0; l < N_PL; l++)
      for (int s = 0; s < MAXLAT; s++) pipe[l][s] = '0;
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < N_PL; l++) begin
      pipe[l][0] <= req[l];
      for (int s = 1; s < MAXLAT; s++) begin
        pipe[l][s] <= pipe[l][s-1];
        if (s == lat) pipe[l][s].valid <= 1'b0;   // served: never replay
      end
    end
  end

  always @(posedge clk) begin
    int n;
    n = 0;
    for (int l = 0; l < N_PL; l++) n += int'(req[l].valid);
    served <= served + n;
  end

  always_comb begin
    for (int l = 0; l < N_PL; l++) begin
      mem_req_t h;
      h = pipe[l][lat-1];
      resp[l].valid = h.valid;
      resp[l].is_v  = h.is_v;
      resp[l].tok   = h.tok;
      resp[l].chunk = h.chunk;
      for (int d = 0; d < DIM; d++) begin
        logic [OP_W-1:0] e;
        e = h.is_v ? vmem[h.tok][d] : kmem[h.tok][d];
        resp[l].data[d*CHUNK_W +: CHUNK_W] = e[OP_W-1-CHUNK_W*h.chunk -: CHUNK_W];
      end
    end
  end
endmodule
