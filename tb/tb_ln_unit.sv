// tb_ln_unit: compares ln_unit with a floating-point logarithm for powers of
// two, random values over the whole 48-bit range and zero; the result must be
// within 2 LSB (2/256) of ln(f / 2^16).
module tb_ln_unit;
  import topick_pkg::*;
  logic [DEN_W-1:0] f;
  score_t y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ln_unit dut (.f, .y);

  task automatic one(input logic [DEN_W-1:0] fi);
    real ref_v;
    f = fi;
    #1;
    ref_v = $ln(real'(fi) / 65536.0) * 256.0;
    checks++;
    if (real'(y) > ref_v + 2.0 || real'(y) < ref_v - 2.0) begin
      failures++;
      $display("FAIL f=%0d y=%0d ref=%f", fi, y, ref_v);
    end
  endtask

  initial begin
    for (int b = 0; b < DEN_W; b++) one(DEN_W'(1) << b);
    for (int i = 0; i < 2000; i++) begin
      logic [DEN_W-1:0] v;
      v = {$urandom, $urandom} >> ($urandom % 47);
      if (v == 0) v = 1;
      one(v);
    end
    f = '0; #1; checks++;
    if (y != {1'b1, {(SCORE_W-1){1'b0}}}) begin failures++; $display("FAIL ln(0)"); end
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
