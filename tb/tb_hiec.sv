// tb_hiec: random statistics and deltas (several D and Umax settings, plus
// t = 0 raw samples and deltas past the unary limit) through the high-entropy
// coder. The expected codeword is built bit by bit from the definition of
// R'_k (k LSBs, '1', u zeros; or D bits and Umax zeros) with k searched
// downward from max(D-2, 2); checks codeword, length and the 5-cycle latency
// at full rate.
// The code and the 3 + 2 stage latency are the paper's; the 4*Gamma
// comparison follows the unit's schematic and the standard.
module tb_hiec;
  import hec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [D_W-1:0] d;
  logic [UMAX_W-1:0] umax;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  stats_t s_data;
  hi_code_t m_data;
  int checks = 0, failures = 0, n_limit = 0, n_raw = 0, cyc = 0;
  hi_code_t exp_q[$];
  int t_in[$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  hiec dut (.*);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_data != exp_q[0]) begin
      failures++;
      $display("FAIL: got %h/%0d exp %h/%0d", m_data.cw, m_data.len, exp_q[0].cw, exp_q[0].len);
    end
    checks++;
    if (cyc - t_in[0] != 5) begin failures++; $display("FAIL: latency %0d", cyc - t_in[0]); end
    void'(exp_q.pop_front()); void'(t_in.pop_front());
  end

  function automatic hi_code_t expect_code(stats_t s, int dd, int um);
    hi_code_t c;
    int k, kmax;
    longint unsigned u;
    bit b[$];
    if (s.zero) begin
      for (int i = dd - 1; i >= 0; i--) b.push_back(s.delta[i]);
    end else begin
      kmax = (dd - 2 > 2) ? dd - 2 : 2;
      k = 0;
      for (int kk = kmax; kk >= 0; kk--)
        if (longint'(s.gamma) * (64'd4 << kk) <= longint'(s.sigma) + (49 * longint'(s.gamma)) / 32) begin
          k = kk; break;
        end
      u = longint'(s.delta) >> k;
      if (u < longint'(um)) begin
        for (int i = k - 1; i >= 0; i--) b.push_back(s.delta[i]);
        b.push_back(1'b1);
        for (int i = 0; i < int'(u); i++) b.push_back(1'b0);
      end else begin
        for (int i = dd - 1; i >= 0; i--) b.push_back(s.delta[i]);
        for (int i = 0; i < um; i++) b.push_back(1'b0);
        n_limit++;
      end
    end
    c.cw = '0;
    foreach (b[i]) c.cw = {c.cw[HI_CW_W-2:0], b[i]};
    c.len = LEN_W'(b.size());
    return c;
  endfunction

  task automatic burst(int dd, int um, int n);
    d = D_W'(dd); umax = UMAX_W'(um);
    for (int i = 0; i < n; i++) begin
      stats_t s = '0;
      int gm = 1 + $urandom % 63;
      int w = $urandom % (dd + 1);
      s.gamma = GAMMA_W'(gm);
      s.delta = D_MAX'($urandom) & ((D_MAX'(1) << w) - 1) & ((D_MAX'(1) << dd) - 1);
      s.sigma = SIGMA_W'(longint'(gm) * ($urandom % (1 << (dd + 2))) / (1 + $urandom % 8));
      s.zero  = ($urandom % 20 == 0);
      if (s.zero) n_raw++;
      exp_q.push_back(expect_code(s, dd, um));
      s_valid <= 1; s_data <= s;
      @(posedge clk);
      t_in.push_back(cyc);
    end
    s_valid <= 0;
    repeat (8) @(posedge clk);
  endtask

  initial begin
    s_data = '0; d = D_W'(16); umax = UMAX_W'(18);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    burst(16, 18, 400);
    burst(12, 8, 300);
    burst(4, 8, 100);
    burst(8, 16, 300);
    checks++;
    if (n_limit == 0 || n_raw == 0 || exp_q.size() != 0) begin
      failures++; $display("FAIL: limit %0d raw %0d left %0d", n_limit, n_raw, exp_q.size());
    end
    $display("unary-limit codes %0d, raw %0d", n_limit, n_raw);
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
