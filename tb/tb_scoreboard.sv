// tb_scoreboard: random insert / update / remove traffic on the 32-entry
// scoreboard, checked against an associative-array model: lookups return the
// last stored partial score and exp of a token, removed tokens miss, and the
// entry count matches. It also fills all 32 entries.
module tb_scoreboard;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic [TOK_W-1:0] lk_tok = '0;
  logic lk_hit, wr_en = 0, rm_en = 0;
  score_t lk_score, wr_score = '0;
  exp_t lk_exp, wr_exp = '0;
  logic [5:0] count;
  int checks = 0, failures = 0;
  score_t m_s [int];
  exp_t   m_e [int];

  scoreboard dut (.*);

  task automatic look(input int t);
    lk_tok = TOK_W'(t); wr_en = 0; rm_en = 0;
    #1;
    checks++;
    if (lk_hit != m_s.exists(t)) begin failures++; $display("FAIL hit tok %0d", t); end
    else if (lk_hit && (lk_score != m_s[t] || lk_exp != m_e[t])) begin
      failures++; $display("FAIL data tok %0d", t);
    end
    checks++;
    if (int'(count) != m_s.num()) begin failures++; $display("FAIL count %0d vs %0d", count, m_s.num()); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill completely
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      lk_tok = TOK_W'(i * 7); wr_en = 1; rm_en = 0;
      wr_score = score_t'($urandom); wr_exp = $urandom;
      m_s[i*7] = wr_score; m_e[i*7] = wr_exp;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 32; i++) look(i * 7);
    // random traffic, never more than 32 live tokens
    for (int n = 0; n < 3000; n++) begin
      int t, op;
      @(negedge clk);
      t  = int'($urandom % 64);
      op = int'($urandom % 3);
      look(t);
      if (op == 0 && (m_s.exists(t) || m_s.num() < 32)) begin
        wr_en = 1; wr_score = score_t'($urandom); wr_exp = $urandom;
        m_s[t] = wr_score; m_e[t] = wr_exp;
      end else if (op == 1) begin
        rm_en = 1;
        if (m_s.exists(t)) begin m_s.delete(t); m_e.delete(t); end
      end
    end
    @(negedge clk); wr_en = 0; rm_en = 0;
    for (int t = 0; t < 64; t++) look(t);
    // clear empties it
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    m_s.delete(); m_e.delete();
    look(7);
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
