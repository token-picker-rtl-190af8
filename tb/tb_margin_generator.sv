// tb_margin_generator: loads random queries and checks the CM LUT two ways:
// against the margin formula, and by the property that matters, namely that
// for random keys the true dot product always lies inside
// [partial + M_min^b, partial + M_max^b] (in score units) for every b.
module tb_margin_generator;
  import topick_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  always #5 clk = ~clk;
  op_t q [DIM];
  score_t m_min [N_CHUNK], m_max [N_CHUNK];
  int checks = 0, failures = 0;

  margin_generator dut (.clk, .rst_n, .load, .q, .m_min, .m_max);

  function automatic longint fdiv(input longint a, input longint b);  // floor division
    longint r;
    r = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) r -= 1;
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 40; rep++) begin
      longint ps, ns;
      int mag;
      mag = (rep % 2) ? 2048 : 64;
      ps = 0; ns = 0;
      for (int d = 0; d < DIM; d++) begin
        q[d] = op_t'(int'($urandom % (2 * mag)) - mag);
        if (q[d] > 0) ps += q[d]; else ns += q[d];
      end
      @(negedge clk) load = 1;
      @(negedge clk) load = 0;
      for (int b = 0; b < N_CHUNK; b++) begin
        longint u, emax, emin;
        u = 1 << (4 * (2 - b));
        emax = -fdiv(-(ps * (u - 1)), 64);
        emin = fdiv(ns * (u - 1), 64);
        checks++;
        if (longint'(m_max[b]) != emax || longint'(m_min[b]) != emin) begin
          failures++;
          $display("FAIL b=%0d max %0d/%0d min %0d/%0d", b, m_max[b], emax, m_min[b], emin);
        end
      end
      for (int kr = 0; kr < 20; kr++) begin
        longint full, part [N_CHUNK];
        full = 0;
        for (int b = 0; b < N_CHUNK; b++) part[b] = 0;
        for (int d = 0; d < DIM; d++) begin
          int k;
          k = int'($urandom % 4096) - 2048;
          full += longint'(q[d]) * k;
          for (int b = 0; b < N_CHUNK; b++) begin
            int kp;
            kp = (k >>> (4 * (2 - b))) <<< (4 * (2 - b));   // unknown bits zero
            part[b] += longint'(q[d]) * kp;
          end
        end
        for (int b = 0; b < N_CHUNK; b++) begin
          checks++;
          if (real'(full) / 64.0 > real'(part[b]) / 64.0 + real'(m_max[b]) + 1e-9 ||
              real'(full) / 64.0 < real'(part[b]) / 64.0 + real'(m_min[b]) - 1e-9) begin
            failures++;
            $display("FAIL bound b=%0d full=%0d part=%0d", b, full, part[b]);
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
