// tb_rpdu: random and boundary cases of the prune decision
// s + M_max - ln(den) <= ln(thr), and the request outputs that follow from it
// for each chunk index.
module tb_rpdu;
  import topick_pkg::*;
  logic valid;
  score_t score, m_max, ln_den, ln_thr;
  cidx_t chunk_idx;
  logic prune, req_next, keep, req_first;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  rpdu dut (.*);

  task automatic one(input int s, input int mx, input int ld, input int lt, input int c, input bit v);
    bit ep;
    valid = v; score = score_t'(s); m_max = score_t'(mx); ln_den = score_t'(ld); ln_thr = score_t'(lt);
    chunk_idx = cidx_t'(c);
    #1;
    ep = v && (longint'(s) + mx - ld <= lt);
    checks++;
    if (prune != ep || req_next != (v && !ep && c < 2) || keep != (v && !ep && c == 2) ||
        req_first != (ep || (v && !ep && c == 2))) begin
      failures++;
      $display("FAIL s=%0d mx=%0d ld=%0d lt=%0d c=%0d -> %b%b%b%b", s, mx, ld, lt, c, prune, req_next, keep, req_first);
    end
  endtask

  initial begin
    for (int c = 0; c < 3; c++) begin
      one(100, 50, 2000, -1850, c, 1);   // exactly on the threshold: prune
      one(101, 50, 2000, -1850, c, 1);   // one above: keep going
      one(100, 50, 2000, -1850, c, 0);   // invalid: nothing
    end
    one(-8388608, 0, 8388607, 0, 0, 1);  // extreme values must not wrap
    one(8388607, 8388607, -8388608, 0, 1, 1);
    for (int i = 0; i < 3000; i++)
      one(int'($urandom % 20000) - 10000, int'($urandom % 3000), int'($urandom % 6000) - 1000,
          -int'($urandom % 4000), int'($urandom % 3), 1);
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
