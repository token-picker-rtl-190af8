// tb_pe_lane: one PE lane (lane 0) against its own memory model, with the
// margins, ln(denominator) and threshold driven by the testbench.
//   A. no pruning possible: every owned token fetches all three K chunks,
//      token 0 is requested first and the rest newest-first, the final score
//      of every token equals sum_b floor(q.k^b / 64), and in step 1 every
//      token's p_i and the accumulators o_acc = sum p_i v_i are exact;
//   B. a threshold that prunes everything: only first chunks are fetched and
//      every token is counted as pruned;
//   C. memory latency 40 with 128 owned tokens: the lane must stall at 32
//      tokens in flight and still finish with correct scores.
module tb_pe_lane;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, run1 = 0;
  logic [NTOK_W-1:0] n_tok = '0;
  score_t ln_thr = '0, ln_den = '0;
  score_t m_min [N_CHUNK], m_max [N_CHUNK];
  op_t a [DIM];
  chunk_resp_t resp;
  chunk_req_t req;
  delta_t delta;
  logic [P_W-1:0] p;
  logic signed [O_W-1:0] o_acc [DIM];
  logic done0, done1;
  logic [15:0] cnt_prune, cnt_keep, cnt_stall;
  int checks = 0, failures = 0;

  pe_lane #(.LANE(0)) dut (.*);

  int q [DIM];
  int kk [MAX_CTX][DIM];
  int vv [MAX_CTX][DIM];
  int lat = 6;
  chunk_req_t pipe [64];
  int order [$];
  int nk [MAX_CTX];
  int score_seen [int];
  int p_seen [int];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  // memory: fixed latency delay line
  always @(posedge clk) begin
    for (int s = 63; s > 0; s--) pipe[s] <= (s == lat) ? '0 : pipe[s-1];
    pipe[0] <= req;
    if (req.valid && !req.is_v) begin
      nk[req.tok]++;
      if (req.chunk == 0) order.push_back(int'(req.tok));
    end
    if (dut.keep) score_seen[int'(dut.r.tok)] = int'(dut.s_new);
    if (dut.vv && dut.r.chunk == 0) p_seen[int'(dut.r.tok)] = int'(p);
  end
  always_comb begin
    chunk_req_t h;
    h = pipe[lat-1];
    resp.valid = h.valid; resp.is_v = h.is_v; resp.tok = h.tok; resp.chunk = h.chunk;
    for (int d = 0; d < DIM; d++) begin
      logic [11:0] e;
      e = h.is_v ? 12'(vv[h.tok][d]) : 12'(kk[h.tok][d]);
      resp.data[d*4 +: 4] = e[11 - 4*h.chunk -: 4];
    end
  end
  // operand A as the MUX network would supply it
  always_comb for (int d = 0; d < DIM; d++) a[d] = run1 ? op_t'(p) : op_t'(q[d]);

  function automatic int ref_score(input int t);
    longint s;
    s = 0;
    for (int b = 0; b < 3; b++) begin
      longint dot;
      dot = 0;
      for (int d = 0; d < DIM; d++) begin
        int kp;
        kp = (kk[t][d] >>> (4 * (2 - b))) <<< (4 * (2 - b));
        kp = (b == 0) ? kp : (kp & ((1 << (4 * (3 - b))) - 1));
        dot += longint'(q[d]) * kp;
      end
      s += dot >>> 6;
    end
    return int'(s);
  endfunction

  task automatic run(input int ntok, input int latency, input int thr, input bit do_step1, input string name);
    int own, ln_d;
    lat = latency;
    n_tok = NTOK_W'(ntok);
    ln_thr = score_t'(thr);
    // an empty denominator never prunes; for case B use ln(den) = 0
    ln_den = (thr > 8000000) ? score_t'(0) : {1'b1, 23'd0};
    order.delete(); score_seen.delete(); p_seen.delete();
    for (int i = 0; i < MAX_CTX; i++) nk[i] = 0;
    own = (ntok + 15) / 16;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done0) @(negedge clk);
    chk(order.size() == own, $sformatf("%s: %0d first chunks", name, order.size()));
    if (order.size() > 1) chk(order[0] == 0 && order[1] == (own - 1) * 16 && order[own-1] == 16,
                              $sformatf("%s: request order", name));
    for (int i = 2; i < order.size(); i++)
      chk(order[i] == order[i-1] - 16, $sformatf("%s: descending order", name));
    if (thr > 8000000) begin
      chk(int'(cnt_prune) == own && cnt_keep == 0, $sformatf("%s: all pruned", name));
      for (int j = 0; j < own; j++) chk(nk[16*j] == 1, $sformatf("%s: only first chunk", name));
    end else begin
      chk(int'(cnt_keep) == own && cnt_prune == 0, $sformatf("%s: all kept", name));
      for (int j = 0; j < own; j++) begin
        chk(nk[16*j] == 3, $sformatf("%s: three chunks of %0d", name, 16*j));
        chk(score_seen.exists(16*j) && score_seen[16*j] == ref_score(16*j),
            $sformatf("%s: score of %0d", name, 16*j));
      end
    end
    if (do_step1) begin
      ln_d = 1200;
      ln_den = score_t'(ln_d);
      @(negedge clk) run1 = 1;
      while (!done1) @(negedge clk);
      run1 = 0;
      for (int d = 0; d < DIM; d++) begin
        longint o;
        o = 0;
        foreach (p_seen[t]) o += longint'(p_seen[t]) * vv[t][d];
        chk(longint'(o_acc[d]) == o, $sformatf("%s: o_acc[%0d]", name, d));
      end
      foreach (score_seen[t]) begin
        real r;
        int e;
        r = $exp(real'(score_seen[t] - ln_d) / 256.0) * 2048.0;
        e = (r >= 2047.0) ? 2047 : int'($floor(r));
        chk(p_seen.exists(t) && p_seen[t] <= e + 2 && p_seen[t] >= e - 2,
            $sformatf("%s: p of %0d = %0d, expected %0d", name, t, p_seen.exists(t) ? p_seen[t] : -1, e));
      end
    end
  endtask

  initial begin
    for (int s = 0; s < 64; s++) pipe[s] = '0;
    for (int b = 0; b < N_CHUNK; b++) begin m_min[b] = '0; m_max[b] = '0; end
    for (int d = 0; d < DIM; d++) q[d] = int'($urandom % 17) - 8;
    for (int i = 0; i < MAX_CTX; i++)
      for (int d = 0; d < DIM; d++) begin
        kk[i][d] = int'($urandom % 4096) - 2048;
        vv[i][d] = int'($urandom % 4096) - 2048;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(300, 6, -8388608, 1, "A");
    run(300, 6, 8388607, 0, "B");
    run(2048, 40, -8388608, 0, "C");
    chk(cnt_stall > 0, "C: in-flight stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
