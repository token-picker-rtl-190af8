// tb_topick_top: end-to-end test of the accelerator at its full default size
// (16 lanes, 64-dimensional head, 2048-token context).
//
// The testbench builds a query and 2048 keys/values in which token 0 and a
// few recent tokens are strongly aligned with the query (the locality the
// design exploits), runs three operations and compares each o_t with a
// floating-point softmax-attention reference:
//   1. generation phase, memory latency 8 cycles;
//   2. generation phase, memory latency 48 cycles (longer than the
//      32-token in-flight limit, so lanes must stall);
//   3. prompt phase: K/V preloaded into the on-chip buffers, no DRAM traffic.
// It also checks that no token whose true probability is clearly above thr
// was dropped, that every kept token fetched its three V chunks exactly once,
// and it counts the mechanisms (early pruning, pruning at the last chunk,
// new first-chunk requests while downstream chunks are in flight, lane
// stalls, step-0/step-1 switch, prompt-phase operation) and fails if one
// never happened.
module tb_topick_top;
  import topick_pkg::*;

  localparam int NT = MAX_CTX;
  localparam real SCALE = 16384.0;     // dot product per natural-log unit
  localparam real LN_THR = -9.0;       // thr = e^-9 ~ 1.2e-4

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            opb_wr_en = 0;
  logic [6:0]      opb_wr_addr = 0;
  logic [31:0]     opb_wr_data = 0;
  logic [N_PL-1:0] kvb_wr_en = '0;
  logic            kvb_wr_is_v = 0;
  logic [8:0]      kvb_wr_addr = 0;
  logic [CVEC_W-1:0] kvb_wr_data = '0;
  logic            start = 0, prompt_mode = 0, busy, done;
  logic [NTOK_W-1:0] n_tok = NTOK_W'(NT);
  score_t          ln_thr = score_t'(int'(LN_THR * 256.0));
  mem_req_t        mem_req [N_PL];
  chunk_resp_t     mem_resp [N_PL];
  logic signed [OT_W-1:0] o_t [DIM];
  logic [DEN_W-1:0] den;
  logic [31:0]     k_chunks, v_chunks, cycles, n_pruned, n_kept, n_stall;
  int              lat = 8;

  topick_top dut (.*);
  dram_model u_mem (.clk, .lat, .req(mem_req), .resp(mem_resp));

  int checks = 0, failures = 0;
  int ev_early = 0, ev_last = 0, ev_ooo = 0, ev_stall = 0, ev_step = 0, ev_prompt = 0;

  // test data
  int  q  [DIM];
  int  kk [NT][DIM];
  int  vv [NT][DIM];
  real pref [NT];
  real oref [DIM];

  // traffic seen on the memory port / lane request ports in one operation
  bit  seen_k [NT][N_CHUNK];
  int  seen_v [NT];
  int  ds_out [N_PL];   // downstream K chunks outstanding per lane

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // lane request monitor (works in both phases)
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N_PL; l++) begin
      chunk_req_t r;
      r = dut.lane_req[l];
      if (r.valid && !r.is_v) begin
        if (seen_k[r.tok][r.chunk]) check(0, $sformatf("K chunk %0d of token %0d requested twice", r.chunk, r.tok));
        seen_k[r.tok][r.chunk] = 1;
        if (r.chunk == 0 && ds_out[l] > 0) ev_ooo++;
        if (r.chunk != 0) ds_out[l]++;
      end
      if (r.valid && r.is_v) seen_v[r.tok]++;
      if (dut.lane_resp[l].valid && !dut.lane_resp[l].is_v && dut.lane_resp[l].chunk != 0) ds_out[l]--;
    end
  end

  task automatic make_data();
    for (int d = 0; d < DIM; d++) q[d] = rnd(-8, 8);
    for (int i = 0; i < NT; i++) begin
      bit dom;
      int amp;
      dom = (i == 0) || (i >= NT - 6) || (i % 97 == 5);
      amp = (i == 0) ? 480 : (i % 97 == 5) ? 300 : 380 + 10 * (i % 7);
      for (int d = 0; d < DIM; d++) begin
        if (dom) kk[i][d] = (q[d] >= 0 ? amp : -amp) + rnd(-300, 300);
        else     kk[i][d] = rnd(-2047, 2047);
        vv[i][d] = rnd(-2047, 2047);
        u_mem.kmem[i][d] = 12'(kk[i][d]);
        u_mem.vmem[i][d] = 12'(vv[i][d]);
      end
    end
    // reference softmax attention in floating point
    begin
      real s [NT];
      real mx, sum;
      mx = -1.0e30;
      for (int i = 0; i < NT; i++) begin
        longint dot;
        dot = 0;
        for (int d = 0; d < DIM; d++) dot += longint'(q[d]) * longint'(kk[i][d]);
        s[i] = real'(dot) / SCALE;
        if (s[i] > mx) mx = s[i];
      end
      sum = 0.0;
      for (int i = 0; i < NT; i++) sum += $exp(s[i] - mx);
      for (int i = 0; i < NT; i++) pref[i] = $exp(s[i] - mx) / sum;
      for (int d = 0; d < DIM; d++) begin
        oref[d] = 0.0;
        for (int i = 0; i < NT; i++) oref[d] += pref[i] * real'(vv[i][d]);
      end
      $display("reference: max score %f", mx);
    end
  endtask

  task automatic load_q();
    logic [DIM*OP_W-1:0] img;
    for (int d = 0; d < DIM; d++) img[d*OP_W +: OP_W] = 12'(q[d]);
    for (int w = 0; w < DIM * OP_W / 32; w++) begin
      @(negedge clk);
      opb_wr_en = 1; opb_wr_addr = 7'(w); opb_wr_data = img[w*32 +: 32];
    end
    @(negedge clk) opb_wr_en = 0;
  endtask

  task automatic load_kv_buffers();
    for (int i = 0; i < NT; i++)
      for (int isv = 0; isv < 2; isv++)
        for (int c = 0; c < N_CHUNK; c++) begin
          logic [CVEC_W-1:0] w;
          for (int d = 0; d < DIM; d++) begin
            logic [OP_W-1:0] e;
            e = (isv != 0) ? 12'(vv[i][d]) : 12'(kk[i][d]);
            w[d*CHUNK_W +: CHUNK_W] = e[OP_W-1-CHUNK_W*c -: CHUNK_W];
          end
          @(negedge clk);
          kvb_wr_en = '0; kvb_wr_en[i % N_PL] = 1'b1;
          kvb_wr_is_v = isv[0]; kvb_wr_addr = 9'((i / N_PL) * N_CHUNK + c); kvb_wr_data = w;
        end
    @(negedge clk) kvb_wr_en = '0;
  endtask

  task automatic run_op(input string name, input bit prompt, input int latency);
    int served0, kept, early, last, tol_bad;
    real thr, maxerr;
    for (int i = 0; i < NT; i++) begin
      seen_v[i] = 0;
      for (int c = 0; c < N_CHUNK; c++) seen_k[i][c] = 0;
    end
    for (int l = 0; l < N_PL; l++) ds_out[l] = 0;
    lat = latency;
    prompt_mode = prompt;
    served0 = u_mem.served;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!dut.u_ctrl.step) @(posedge clk);
    ev_step++;
    while (!done) @(posedge clk);
    @(negedge clk);
    thr = $exp(LN_THR);
    kept = 0; early = 0; last = 0;
    for (int i = 0; i < NT; i++) begin
      check(seen_k[i][0], $sformatf("%s: token %0d never requested", name, i));
      if (seen_v[i] != 0) kept++;
      check(seen_v[i] == 0 || seen_v[i] == N_CHUNK, $sformatf("%s: token %0d fetched %0d V chunks", name, i, seen_v[i]));
      if (seen_v[i] == 0 && !seen_k[i][N_CHUNK-1]) early++;
      if (seen_v[i] == 0 &&  seen_k[i][N_CHUNK-1]) last++;
      // a token clearly above the threshold must never be pruned
      if (pref[i] > 4.0 * thr)
        check(seen_v[i] == N_CHUNK, $sformatf("%s: token %0d (p=%g) pruned", name, i, pref[i]));
    end
    ev_early += early; ev_last += last;
    if (n_stall != 0) ev_stall++;
    check(n_kept == 32'(kept), $sformatf("%s: kept counter %0d vs %0d", name, n_kept, kept));
    check(n_kept + n_pruned == 32'(NT), $sformatf("%s: kept+pruned %0d", name, n_kept + n_pruned));
    if (prompt) begin
      ev_prompt++;
      check(u_mem.served == served0, $sformatf("%s: DRAM used in prompt phase", name));
      check(k_chunks == 0 && v_chunks == 0, $sformatf("%s: DRAM counters %0d %0d", name, k_chunks, v_chunks));
    end else begin
      check(v_chunks == 32'(N_CHUNK * kept), $sformatf("%s: v_chunks %0d", name, v_chunks));
      check(k_chunks < 32'(N_CHUNK * NT), $sformatf("%s: no K chunk saved (%0d)", name, k_chunks));
      check(u_mem.served - served0 == int'(k_chunks + v_chunks), $sformatf("%s: DRAM served count %0d vs %0d", name, u_mem.served - served0, k_chunks + v_chunks));
    end
    // o_t against the floating-point reference
    maxerr = 0.0; tol_bad = 0;
    for (int d = 0; d < DIM; d++) begin
      real got, err, tol;
      got = real'(o_t[d]) / 2048.0;
      err = (got > oref[d]) ? got - oref[d] : oref[d] - got;
      tol = 48.0;  // Q1.11 truncation of p over ~600 kept tokens plus exp/ln table error
      if (err > maxerr) maxerr = err;
      if (err > tol) tol_bad++;
      check(err <= tol, $sformatf("%s: o_t[%0d] = %f, reference %f", name, d, got, oref[d]));
    end
    $display("%s: cycles=%0d kept=%0d pruned=%0d (early %0d, last chunk %0d) K chunks=%0d/%0d V chunks=%0d stall cycles=%0d max |o_t err|=%f",
             name, cycles, kept, NT - kept, early, last, k_chunks, N_CHUNK * NT, v_chunks, n_stall, maxerr);
  endtask

  initial begin
    for (int l = 0; l < N_PL; l++) ds_out[l] = 0;
    make_data();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_q();
    run_op("gen_lat8", 1'b0, 8);
    run_op("gen_lat48", 1'b0, 48);
    load_kv_buffers();
    run_op("prompt", 1'b1, 8);
    $display("events: early_prune=%0d last_chunk_prune=%0d first_chunk_while_downstream_pending=%0d stall_ops=%0d step_switch=%0d prompt_ops=%0d",
             ev_early, ev_last, ev_ooo, ev_stall, ev_step, ev_prompt);
    check(ev_early > 0, "no early pruning");
    check(ev_last > 0, "no last-chunk pruning");
    check(ev_ooo > 0, "no out-of-order processing");
    check(ev_stall > 0, "no in-flight stall");
    check(ev_step == 3, "step switch count");
    check(ev_prompt > 0, "no prompt-phase operation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
