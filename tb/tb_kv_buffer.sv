// tb_kv_buffer: fills one lane's K and V buffers with random chunk vectors
// and reads them back through the request port, checking data, tag and the
// one-cycle read latency.
module tb_kv_buffer;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_is_v = 0;
  logic [8:0] wr_addr = 0;
  logic [CVEC_W-1:0] wr_data = '0;
  chunk_req_t rd_req = '0;
  chunk_resp_t rd_resp;
  int checks = 0, failures = 0;
  logic [CVEC_W-1:0] shadow [2][384];

  kv_buffer dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 2; v++)
      for (int a = 0; a < 384; a++) begin
        @(negedge clk);
        wr_en = 1; wr_is_v = v[0]; wr_addr = 9'(a);
        for (int w = 0; w < CVEC_W / 32; w++) wr_data[w*32 +: 32] = $urandom;
        shadow[v][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 800; n++) begin
      int lt, c, v, lane;
      lt = int'($urandom % 128); c = int'($urandom % 3); v = int'($urandom % 2);
      lane = 3;
      @(negedge clk);
      rd_req = '{valid: 1'b1, is_v: v[0], tok: gtok_t'(lt * N_PL + lane), chunk: cidx_t'(c)};
      @(negedge clk);
      rd_req = '0;
      checks++;
      if (!rd_resp.valid || rd_resp.tok != gtok_t'(lt * N_PL + lane) || rd_resp.chunk != cidx_t'(c) ||
          rd_resp.is_v != v[0] || rd_resp.data != shadow[v][lt * 3 + c]) begin
        failures++; $display("FAIL tok %0d chunk %0d v %0d", lt, c, v);
      end
      @(negedge clk);
      checks++;
      if (rd_resp.valid) begin failures++; $display("FAIL valid stuck"); end
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
