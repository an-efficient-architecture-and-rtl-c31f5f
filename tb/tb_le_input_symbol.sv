// tb_le_input_symbol: every L_i of the standard against deltas 0..40 with
// random output stalls; iota must be delta when delta <= L_i and L_i + 1
// (the escape symbol) otherwise, with the other fields passed unchanged.
// The symbol rule is the paper's; L_i are the standard's.
module tb_le_input_symbol;
  import hec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  le_idx_t s_data;
  le_sym_t m_data;
  int checks = 0, failures = 0, n_esc = 0;
  le_sym_t exp_q[$];

  always #5 clk = ~clk;
  le_input_symbol dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      if (m_data != exp_q[0]) begin
        failures++; $display("FAIL: delta %0d lim %0d iota %0d", m_data.c.delta, m_data.c.lim, m_data.iota);
      end
      void'(exp_q.pop_front());
    end
    m_ready <= ($urandom % 3 != 0);
  end

  initial begin
    s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 16; i++)
      for (int dl = 0; dl <= 40; dl++) begin
        le_sym_t e;
        le_idx_t c;
        c = '0;
        c.delta = D_MAX'(dl);
        c.idx = CI_W'(i);
        c.lim = L_TAB[i];
        c.active = 1'($urandom);
        e.c = c;
        e.iota = (dl <= int'(L_TAB[i])) ? SYM_W'(dl) : SYM_W'(int'(L_TAB[i]) + 1);
        if (dl > int'(L_TAB[i])) n_esc++;
        exp_q.push_back(e);
        s_valid <= 1; s_data <= c;
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    s_valid <= 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d missing", exp_q.size()); end
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
