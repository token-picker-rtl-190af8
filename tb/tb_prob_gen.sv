// tb_prob_gen: pushes tokens with random scores into the Probability
// Generator, starts step 1 and checks that each token gets exactly the three
// V chunk requests 0,1,2 on consecutive cycles in FIFO order, and that p_i
// matches floor(exp(s_i - ln(den)) * 2^11), saturated at 2047, within 2 LSB.
module tb_prob_gen;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic push = 0, run = 0, pop = 0;
  gtok_t push_tok = '0;
  score_t push_score = '0, ln_den = '0;
  chunk_req_t req;
  logic p_valid, idle;
  gtok_t p_tok;
  logic [P_W-1:0] p;
  int checks = 0, failures = 0;
  localparam int N = 60;
  int toks [N];
  int scs  [N];
  int nreq = 0, npop = 0;

  prob_gen dut (.*);

  // consumer: after the third chunk of the head token has been requested,
  // retire it a few cycles later and check its probability
  int seen [int];
  always @(posedge clk) if (run) begin
    if (req.valid) begin
      int t;
      t = nreq / 3;
      checks++;
      if (int'(req.tok) != toks[t] || int'(req.chunk) != nreq % 3 || !req.is_v) begin
        failures++; $display("FAIL req %0d: tok %0d chunk %0d", nreq, req.tok, req.chunk);
      end
      nreq++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    ln_den = score_t'(5 * 256);
    for (int i = 0; i < N; i++) begin
      toks[i] = int'($urandom % 2048);
      scs[i]  = (i == 3) ? 9 * 256 : 5 * 256 - int'($urandom % 3000);
      @(negedge clk);
      push = 1; push_tok = gtok_t'(toks[i]); push_score = score_t'(scs[i]);
    end
    @(negedge clk) push = 0;
    checks++;
    if (idle) begin failures++; $display("FAIL idle with full FIFO"); end
    run = 1;
    while (npop < N) begin
      @(negedge clk);
      pop = 0;
      if (p_valid && nreq >= 3 * (npop + 1) && ($urandom % 2) == 0) begin
        real r;
        int e;
        r = $exp(real'(scs[npop] - int'(ln_den)) / 256.0) * 2048.0;
        e = (r >= 2047.0) ? 2047 : int'($floor(r));
        checks++;
        if (int'(p_tok) != toks[npop] || int'(p) > e + 2 || int'(p) < e - 2) begin
          failures++; $display("FAIL p tok %0d: %0d vs %0d", p_tok, p, e);
        end
        pop = 1;
        npop++;
      end
    end
    @(negedge clk) pop = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!idle || nreq != 3 * N) begin failures++; $display("FAIL end idle=%0d nreq=%0d", idle, nreq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
