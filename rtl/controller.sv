// controller: sequences one attention operation and forwards the lanes'
// chunk requests to the memory controller.
//
// On start it clears the lanes and the DAG and loads the Margin Generator's
// LUT from q_t (one cycle, state MARGIN), then runs step 0 until every lane
// reports its tokens finished, waits three cycles for ln(denominator) to
// settle (SETTLE), runs step 1 until every lane is idle, and raises done
// (DONE) until the next start. In the generation phase each lane request
// becomes a DRAM request with byte address
//   base + (token*3 + chunk) * 32,  base = 0 for K, 192 KB for V
// (chunk-planar 32-byte words; the five low address bits and every bit above
// the 384 KB K+V region are therefore always zero, the 40-bit width being the
// memory controller's address space); in the prompt phase requests go to the
// lanes' on-chip buffers and nothing is sent to DRAM. It also counts the K
// and V chunks fetched from DRAM. The paper shows a Controller between the
// lanes' chunk requests and the memory controller; the state sequence and
// address map are this design's.
module controller
  import topick_pkg::*;
#(
  parameter int NLANES = N_PL
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        prompt_mode,
  input  logic        lane_done0 [NLANES],
  input  logic        lane_done1 [NLANES],
  input  chunk_req_t  lane_req   [NLANES],
  output mem_req_t    mem_req    [NLANES],
  output chunk_req_t  sram_req   [NLANES],
  output logic        lane_start,
  output logic        margin_load,
  output logic        run1,
  output logic        step,
  output logic        busy,
  output logic        done,
  output logic [31:0] k_chunks,
  output logic [31:0] v_chunks,
  output logic [31:0] cycles
);
  localparam logic [ADDR_W-1:0] V_BASE = ADDR_W'(MAX_CTX * N_CHUNK * CVEC_W / 8);

  typedef enum logic [2:0] {C_IDLE, C_MARGIN, C_STEP0, C_SETTLE, C_STEP1, C_DONE} cstate_e;
  cstate_e st;
  logic [1:0] settle_cnt;
  logic all0, all1;
  logic [$clog2(NLANES):0] nk, nv;

  always_comb begin
    all0 = 1'b1;
    all1 = 1'b1;
    nk = '0;
    nv = '0;
    for (int l = 0; l < NLANES; l++) begin
      all0 &= lane_done0[l];
      all1 &= lane_done1[l];
      mem_req[l].valid  = lane_req[l].valid && !prompt_mode;
      mem_req[l].is_v   = lane_req[l].is_v;
      mem_req[l].tok    = lane_req[l].tok;
      mem_req[l].chunk  = lane_req[l].chunk;
      mem_req[l].addr   = (lane_req[l].is_v ? V_BASE : '0) +
                          ((ADDR_W'(lane_req[l].tok) * ADDR_W'(N_CHUNK) + ADDR_W'(lane_req[l].chunk)) * ADDR_W'(CVEC_W / 8));
      sram_req[l]       = lane_req[l];
      sram_req[l].valid = lane_req[l].valid && prompt_mode;
      nk += ($clog2(NLANES)+1)'(mem_req[l].valid && !lane_req[l].is_v);
      nv += ($clog2(NLANES)+1)'(mem_req[l].valid &&  lane_req[l].is_v);
    end
    lane_start  = (st == C_MARGIN);
    margin_load = (st == C_MARGIN);
    run1        = (st == C_STEP1);
    step        = (st == C_STEP1);
    busy        = (st != C_IDLE) && (st != C_DONE);
    done        = (st == C_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; settle_cnt <= '0; k_chunks <= '0; v_chunks <= '0; cycles <= '0;
    end else begin
      if (busy) begin
        k_chunks <= k_chunks + 32'(nk);
        v_chunks <= v_chunks + 32'(nv);
        cycles   <= cycles + 1;
      end
      unique case (st)
        C_IDLE, C_DONE: if (start) begin
          st <= C_MARGIN; k_chunks <= '0; v_chunks <= '0; cycles <= '0;
        end
        C_MARGIN: st <= C_STEP0;
        C_STEP0:  if (all0) begin st <= C_SETTLE; settle_cnt <= '0; end
        C_SETTLE: begin
          settle_cnt <= settle_cnt + 1'b1;
          if (settle_cnt == 2'd2) st <= C_STEP1;
        end
        C_STEP1:  if (all1) st <= C_DONE;
        default:  st <= C_IDLE;
      endcase
    end
  end
endmodule
