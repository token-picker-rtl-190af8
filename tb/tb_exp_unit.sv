// tb_exp_unit: sweeps the score input of exp_unit over its useful range and
// compares e^x (Q16.16) with a floating-point exponential: within 0.1 % plus
// 2 LSB where representable, all ones above the range, zero far below it.
module tb_exp_unit;
  import topick_pkg::*;
  score_t x;
  exp_t   y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  exp_unit dut (.x, .y);

  task automatic one(input int xi);
    real ref_v, got, tol;
    x = score_t'(xi);
    #1;
    ref_v = $exp(real'(xi) / 256.0) * 65536.0;
    got   = real'(y);
    checks++;
    if (ref_v >= 4294967295.0) begin
      if (y != '1) begin failures++; $display("FAIL sat x=%0d y=%0d", xi, y); end
    end else begin
      tol = ref_v * 0.001 + 2.0;
      if (got > ref_v + tol || got < ref_v - tol) begin
        failures++;
        $display("FAIL x=%0d y=%0d ref=%f", xi, y, ref_v);
      end
    end
  endtask

  initial begin
    for (int xi = -256*12; xi <= 256*12; xi += 7) one(xi);
    for (int i = 0; i < 500; i++) one(int'($urandom % 6000) - 3000);
    one(0); one(256); one(-256);
    x = score_t'(-256*40); #1; checks++;
    if (y != 0) begin failures++; $display("FAIL flush y=%0d", y); end
    x = score_t'(256*40); #1; checks++;
    if (y != '1) begin failures++; $display("FAIL saturate y=%0d", y); end
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
