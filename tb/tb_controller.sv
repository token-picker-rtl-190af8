// tb_controller: plays the 16 lanes around the controller. It checks the
// operation sequence (lane start and margin load for one cycle, step 0 until
// all lanes finish, three settling cycles, step 1 until all lanes are idle,
// done), the DRAM byte addresses and tags of forwarded requests, that the
// prompt phase routes requests to the on-chip buffers only, and the K/V chunk
// counters.
module tb_controller;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, prompt_mode = 0;
  always #5 clk = ~clk;
  logic lane_done0 [N_PL], lane_done1 [N_PL];
  chunk_req_t lane_req [N_PL], sram_req [N_PL];
  mem_req_t mem_req [N_PL];
  logic lane_start, margin_load, run1, step, busy, done;
  logic [31:0] k_chunks, v_chunks, cycles;
  int checks = 0, failures = 0;
  int nk, nv;

  controller dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic drive_reqs(input bit pm);
    for (int l = 0; l < N_PL; l++) begin
      lane_req[l] = '{valid: ($urandom % 2) == 1, is_v: ($urandom % 2) == 1,
                      tok: gtok_t'($urandom), chunk: cidx_t'($urandom % 3)};
    end
    #1;
    for (int l = 0; l < N_PL; l++) begin
      longint a;
      a = (lane_req[l].is_v ? 196608 : 0) + (longint'(lane_req[l].tok) * 3 + lane_req[l].chunk) * 32;
      chk(mem_req[l].valid == (lane_req[l].valid && !pm), "mem valid");
      chk(sram_req[l].valid == (lane_req[l].valid && pm), "sram valid");
      chk(longint'(mem_req[l].addr) == a && mem_req[l].tok == lane_req[l].tok &&
          mem_req[l].chunk == lane_req[l].chunk && mem_req[l].is_v == lane_req[l].is_v, "address/tag");
      if (lane_req[l].valid && !pm) begin
        if (lane_req[l].is_v) nv++; else nk++;
      end
    end
  endtask

  task automatic run_op(input bit pm);
    prompt_mode = pm;
    nk = 0; nv = 0;
    for (int l = 0; l < N_PL; l++) begin lane_done0[l] = 0; lane_done1[l] = 0; lane_req[l] = '0; end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    chk(lane_start && margin_load && busy && !run1, "margin/start cycle");
    @(negedge clk);
    chk(!lane_start && !run1 && busy, "step 0");
    for (int c = 0; c < 12; c++) begin
      drive_reqs(pm);
      if (c > 5) for (int l = 0; l < N_PL - 1; l++) lane_done0[l] = 1;
      @(negedge clk);
      chk(!run1, "waits for every lane in step 0");
    end
    for (int l = 0; l < N_PL; l++) lane_req[l] = '0;
    lane_done0[N_PL-1] = 1;
    @(negedge clk);
    for (int c = 0; c < 3; c++) begin
      chk(!run1 && busy, "settling");
      @(negedge clk);
    end
    chk(run1 && step, "step 1 entered");
    for (int c = 0; c < 8; c++) begin
      drive_reqs(pm);
      @(negedge clk);
      chk(run1 && !done, "step 1 held");
    end
    for (int l = 0; l < N_PL; l++) begin lane_done1[l] = 1; lane_req[l] = '0; end
    @(negedge clk);
    chk(done && !busy, "done");
    chk(k_chunks == 32'(nk) && v_chunks == 32'(nv), $sformatf("counters %0d/%0d %0d/%0d", k_chunks, nk, v_chunks, nv));
  endtask

  initial begin
    for (int l = 0; l < N_PL; l++) begin lane_done0[l] = 0; lane_done1[l] = 0; lane_req[l] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done, "idle after reset");
    run_op(0);
    run_op(1);
    run_op(0);
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
