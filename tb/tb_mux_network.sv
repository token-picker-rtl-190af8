// tb_mux_network: drives distinct values on every input of the MUX network
// and checks, for all four step/phase settings, that each lane receives q_t
// or its own p_i and the DRAM or on-chip chunk stream.
module tb_mux_network;
  import topick_pkg::*;
  logic step, prompt_mode;
  op_t q [DIM];
  logic [P_W-1:0] p [N_PL];
  chunk_resp_t dram_resp [N_PL], sram_resp [N_PL], lane_resp [N_PL];
  op_t lane_a [N_PL][DIM];
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  mux_network dut (.*);

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int d = 0; d < DIM; d++) q[d] = op_t'($urandom);
      for (int l = 0; l < N_PL; l++) begin
        p[l] = P_W'($urandom);
        dram_resp[l] = '{valid: 1'b1, is_v: 1'b0, tok: gtok_t'($urandom), chunk: 2'd1, data: {8{$urandom}}};
        sram_resp[l] = '{valid: 1'b1, is_v: 1'b1, tok: gtok_t'($urandom), chunk: 2'd2, data: {8{$urandom}}};
      end
      for (int m = 0; m < 4; m++) begin
        step = m[0]; prompt_mode = m[1];
        #1;
        for (int l = 0; l < N_PL; l++) begin
          checks++;
          if (lane_resp[l] != (prompt_mode ? sram_resp[l] : dram_resp[l])) begin
            failures++; $display("FAIL resp lane %0d mode %0d", l, m);
          end
          for (int d = 0; d < DIM; d += 9) begin
            checks++;
            if (lane_a[l][d] != (step ? op_t'(p[l]) : q[d])) begin
              failures++; $display("FAIL a lane %0d d %0d mode %0d", l, d, m);
            end
          end
        end
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
