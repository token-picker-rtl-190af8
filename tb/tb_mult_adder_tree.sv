// tb_mult_adder_tree: feeds random operands and the three 4-bit chunks of a
// random 12-bit key through mult_adder_tree and checks each chunk's dot
// product and element products against a direct calculation, and that the
// three chunk dot products add up to the full-precision q.k.
module tb_mult_adder_tree;
  import topick_pkg::*;
  cidx_t chunk_idx;
  op_t a [DIM];
  logic [CHUNK_W-1:0] b_chunk [DIM];
  logic signed [DOT_W-1:0] dot;
  logic signed [PROD_W-1:0] prod [DIM];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  mult_adder_tree dut (.chunk_idx, .a, .b_chunk, .dot, .prod);

  initial begin
    for (int rep = 0; rep < 300; rep++) begin
      int k [DIM];
      longint full, sum;
      full = 0; sum = 0;
      for (int d = 0; d < DIM; d++) begin
        a[d] = op_t'(int'($urandom % 4096) - 2048);
        k[d] = (rep == 0) ? -2048 : int'($urandom % 4096) - 2048;
        if (rep == 0) a[d] = op_t'(-2048);
        full += longint'(a[d]) * k[d];
      end
      for (int b = 0; b < N_CHUNK; b++) begin
        longint expd;
        expd = 0;
        chunk_idx = cidx_t'(b);
        for (int d = 0; d < DIM; d++) begin
          logic [11:0] kb;
          int part;
          kb = 12'(k[d]);
          b_chunk[d] = kb[11 - 4*b -: 4];
          part = (b == 0) ? (int'($signed(kb[11:8])) * 256) : (b == 1) ? int'(kb[7:4]) * 16 : int'(kb[3:0]);
          expd += longint'(a[d]) * part;
        end
        #1;
        checks++;
        if (longint'(dot) != expd) begin failures++; $display("FAIL b=%0d dot=%0d exp=%0d", b, dot, expd); end
        sum += longint'(dot);
        checks++;
        if (longint'(prod[5]) != longint'(a[5]) * ((b == 0) ? longint'($signed(b_chunk[5])) * 256 : (b == 1) ? longint'(b_chunk[5]) * 16 : longint'(b_chunk[5]))) begin
          failures++; $display("FAIL prod b=%0d", b);
        end
      end
      checks++;
      if (sum != full) begin failures++; $display("FAIL sum %0d full %0d", sum, full); end
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
