// tb_hilo_decision: random statistics (and the boundary cases
// Sigma*2^14 = T_0*Gamma and one above) through the HiLo decision unit;
// checks hilo = (Sigma*2^14 > T_0*Gamma), that the statistics pass
// unchanged, and the 3-cycle latency.
// The orientation checked (high entropy when Sigma*2^14 > T_0*Gamma) follows
// the standard and the paper's code-index rule.
module tb_hilo_decision;
  import hec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  stats_t s_data;
  dec_t m_data;
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  dec_t exp_q[$];
  int t_in[$];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  hilo_decision dut (.*);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_data != exp_q[0]) begin
      failures++; $display("FAIL: sigma %0d gamma %0d hilo %0b", m_data.s.sigma, m_data.s.gamma, m_data.hilo);
    end
    if (m_data.hilo) n_hi++; else n_lo++;
    if (!m_data.hilo && exp_q[0].s.sigma == 0) ;
    checks++;
    if (cyc - t_in[0] != 3) begin failures++; $display("FAIL: latency %0d", cyc - t_in[0]); end
    void'(exp_q.pop_front());
    void'(t_in.pop_front());
  end

  task automatic send(longint sg, int gm);
    dec_t e;
    stats_t s = '0;
    s.sigma = SIGMA_W'(sg);
    s.gamma = GAMMA_W'(gm);
    s.delta = D_MAX'($urandom);
    s.rescale = 1'($urandom);
    e.s = s;
    e.hilo = (sg * 16384 > 64'd303336 * gm);
    exp_q.push_back(e);
    s_valid <= 1; s_data <= s;
    @(posedge clk);
    t_in.push_back(cyc);
  endtask

  initial begin
    s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 500; i++) begin
      int gm = 1 + $urandom % 63;
      longint sg = longint'($urandom % (gm * 40));
      send(sg, gm);
    end
    // exact threshold: 303336*Gamma/16384 for Gamma = 32768/... use Gamma = 32 -> 592.453
    send(592, 32);   // 592*16384 = 9699328 <= 9706752 -> low
    send(593, 32);   // 9715712 > 9706752 -> high
    send(0, 1);
    send((1 << SIGMA_W) - 1, 1);
    s_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_hi == 0 || n_lo == 0 || exp_q.size() != 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
