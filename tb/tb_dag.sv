// tb_dag: applies random per-lane deltas (adding and retracting terms so the
// denominator stays non-negative) and checks den one cycle and ln_den two
// cycles after the deltas, against a running sum and a floating-point log.
module tb_dag;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  delta_t delta [N_PL];
  logic [DEN_W-1:0] den;
  score_t ln_den;
  int checks = 0, failures = 0;
  longint model, prev_model;

  dag dut (.*);

  initial begin
    for (int l = 0; l < N_PL; l++) delta[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    model = 0; prev_model = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int l = 0; l < N_PL; l++) begin
        longint dv;
        dv = longint'($urandom % 32'h0800_0000);
        if (($urandom % 3) == 0 && model > dv * 16) dv = -dv;
        delta[l] = delta_t'(dv);
        model += dv;
      end
      @(posedge clk); #1;
      checks++;
      if (longint'(den) != model) begin failures++; $display("FAIL den %0d vs %0d", den, model); end
      checks++;   // ln_den reflects the previous cycle's den
      if (n > 0 && (real'(ln_den) > $ln(real'(prev_model) / 65536.0) * 256.0 + 2.0 ||
                    real'(ln_den) < $ln(real'(prev_model) / 65536.0) * 256.0 - 2.0)) begin
        failures++; $display("FAIL ln_den %0d for %0d", ln_den, prev_model);
      end
      prev_model = model;
    end
    @(negedge clk);
    for (int l = 0; l < N_PL; l++) delta[l] = '0;
    clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (den != 0 || ln_den != {1'b1, {(SCORE_W-1){1'b0}}}) begin failures++; $display("FAIL clear"); end
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
