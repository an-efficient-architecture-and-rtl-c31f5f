// tb_le_code_index_select: random statistics covering every code index. The
// expected index is found by scanning i = 15 down to 0 for the first
// Sigma*2^14 <= T_i*Gamma (T_i written out here from the standard's table);
// checks index, L_i, the active flag (hilo = 0 and t > 0) and the 3-cycle
// latency, and that all 16 indices occurred.
// The selection rule and the 3-stage DSP-style latency are the paper's.
module tb_le_code_index_select;
  import hec_pkg::*;
  localparam int T [16] = '{303336, 225404, 166979, 128672, 95597, 69670, 50678, 34898,
                            23331, 14935, 9282, 5510, 3195, 1928, 1112, 408};
  localparam int L [16] = '{12, 10, 8, 6, 6, 4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 0};
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  dec_t s_data;
  le_idx_t m_data;
  int checks = 0, failures = 0, cyc = 0;
  le_idx_t exp_q[$];
  int t_in[$];
  bit [15:0] seen = '0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  le_code_index_select dut (.*);

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_data != exp_q[0]) begin
      failures++; $display("FAIL: idx %0d lim %0d act %0b exp idx %0d", m_data.idx, m_data.lim, m_data.active, exp_q[0].idx);
    end
    checks++;
    if (cyc - t_in[0] != 3) begin failures++; $display("FAIL: latency"); end
    void'(exp_q.pop_front()); void'(t_in.pop_front());
  end

  initial begin
    s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      dec_t di;
      le_idx_t e;
      int gm;
      longint sg;
      di = '0;
      e = '0;
      gm = 1 + $urandom % 63;
      // mean Sigma/Gamma spread over 0..~20 on a log-like scale
      sg = (longint'(gm) * ($urandom % 330000)) >> ($urandom % 12) >> 14;
      di.s.gamma = GAMMA_W'(gm);
      di.s.sigma = SIGMA_W'(sg);
      di.s.delta = D_MAX'($urandom % 20);
      di.s.zero  = ($urandom % 30 == 0);
      di.s.last  = 1'($urandom);
      di.hilo    = !(sg * 16384 <= longint'(T[0]) * gm);
      e.delta  = di.s.delta;
      e.last   = di.s.last;
      e.active = !di.hilo && !di.s.zero;
      e.idx    = '0;
      for (int i = 15; i >= 0; i--)
        if (sg * 16384 <= longint'(T[i]) * gm) begin e.idx = CI_W'(i); break; end
      e.lim = SYM_W'(L[e.idx]);
      if (e.active) seen[e.idx] = 1'b1;
      exp_q.push_back(e);
      s_valid <= 1; s_data <= di;
      @(posedge clk);
      t_in.push_back(cyc);
    end
    s_valid <= 0;
    repeat (6) @(posedge clk);
    checks++;
    if (seen != 16'hffff) begin failures++; $display("FAIL: indices seen %b", seen); end
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
