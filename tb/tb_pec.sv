// tb_pec: checks the Partial Exp Calculator against a floating-point model:
// cur_exp = exp(s + M_min) (0 when pruned) within 0.1 %, and
// delta = cur_exp - prev_exp exactly.
module tb_pec;
  import topick_pkg::*;
  score_t score, m_min;
  logic pruned;
  exp_t prev_exp, cur_exp;
  delta_t delta;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  pec dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      real r;
      score    = score_t'(int'($urandom % 4000) - 1500);
      m_min    = score_t'(-int'($urandom % 1500));
      pruned   = ($urandom % 4) == 0;
      prev_exp = $urandom % 32'h0100_0000;
      #1;
      r = pruned ? 0.0 : $exp(real'(int'(score) + int'(m_min)) / 256.0) * 65536.0;
      checks++;
      if (real'(cur_exp) > r * 1.001 + 2.0 || real'(cur_exp) < r * 0.999 - 2.0) begin
        failures++; $display("FAIL exp s=%0d m=%0d got %0d ref %f", score, m_min, cur_exp, r);
      end
      checks++;
      if (longint'(delta) != longint'(cur_exp) - longint'(prev_exp)) begin
        failures++; $display("FAIL delta %0d", delta);
      end
    end
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
