// tb_operand_buffer: writes random query vectors into operand_buffer 32 bits
// at a time and checks every 12-bit element on q the cycle after.
module tb_operand_buffer;
  import topick_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [6:0] wr_addr = 0;
  logic [31:0] wr_data = 0;
  op_t q [DIM];
  int checks = 0, failures = 0;

  operand_buffer dut (.clk, .wr_en, .wr_addr, .wr_data, .q);

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      int qv [DIM];
      logic [DIM*OP_W-1:0] img;
      for (int d = 0; d < DIM; d++) begin
        qv[d] = int'($urandom % 4096) - 2048;
        img[d*OP_W +: OP_W] = 12'(qv[d]);
      end
      for (int w = 0; w < DIM * OP_W / 32; w++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 7'(w); wr_data = img[w*32 +: 32];
      end
      // a write to the unused upper part must not disturb q
      @(negedge clk); wr_addr = 7'd100; wr_data = $urandom;
      @(negedge clk); wr_en = 0;
      for (int d = 0; d < DIM; d++) begin
        checks++;
        if (int'(q[d]) != qv[d]) begin failures++; $display("FAIL q[%0d]=%0d exp %0d", d, q[d], qv[d]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
