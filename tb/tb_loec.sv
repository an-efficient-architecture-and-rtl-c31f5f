// tb_loec: the whole low-entropy coder with its default (stand-in) code
// tables. Random low-entropy statistics, deltas concentrated on small values
// with escapes, high-entropy and t = 0 samples mixed in, random output
// stalls. The reference keeps, per code, the prefix as a symbol string and
// applies the stand-in code definition (two-level trees: "0" then any symbol,
// or one non-zero symbol; n = clog2(2A+1) bit codewords, A = L_i + 2), and
// builds the escape prefix R'_0(delta - L_i - 1) from its definition. After
// the last sample the 16 flush words are checked.
// The three-unit structure is the paper's; the stand-in tables and escape
// placement order are this design's.
module tb_loec;
  import hec_pkg::*;
  localparam int T [16] = '{303336, 225404, 166979, 128672, 95597, 69670, 50678, 34898,
                            23331, 14935, 9282, 5510, 3195, 1928, 1112, 408};
  localparam int L [16] = '{12, 10, 8, 6, 6, 4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 0};
  localparam int DD = 16, UM = 18;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, flush_valid, flush_ready = 0;
  dec_t s_data;
  le_code_t m_data;
  flush_code_t flush_data;
  int checks = 0, failures = 0, n_esc = 0, n_match = 0, n_open = 0;
  le_code_t exp_q[$];
  flush_code_t exp_f[$];
  int open_[16];

  always #5 clk = ~clk;
  loec dut (.clk, .rst_n, .d(D_W'(DD)), .umax(UMAX_W'(UM)), .s_valid, .s_ready, .s_data,
            .m_valid, .m_ready, .m_data, .flush_valid, .flush_ready, .flush_data);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0 || m_data != exp_q[0]) begin
        failures++;
        $display("FAIL: %h/%0d/%0d", m_data.cw, m_data.len, m_data.esc_len);
        if (exp_q.size() > 0) $display("  exp %h/%0d/%0d", exp_q[0].cw, exp_q[0].len, exp_q[0].esc_len);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (flush_valid && flush_ready) begin
      checks++;
      if (exp_f.size() == 0 || flush_data != exp_f[0]) begin
        failures++; $display("FAIL: flush %h/%0d exp %h/%0d", flush_data.cw, flush_data.len, exp_f.size() ? exp_f[0].cw : 0, exp_f.size() ? exp_f[0].len : 0);
      end
      if (exp_f.size() > 0) void'(exp_f.pop_front());
    end
    m_ready     <= ($urandom % 4 != 0);
    flush_ready <= ($urandom % 2 == 0);
  end

  function automatic int nbits(int i);
    return $clog2(2 * (L[i] + 2) + 1);
  endfunction

  function automatic le_code_t model(dec_t di);
    le_code_t e = '0;
    longint sg = longint'(di.s.sigma), gm = longint'(di.s.gamma);
    int idx = 0, a, sym, tl = 0;
    longint unsigned tcw = 0, ecw = 0;
    int el = 0;
    if (di.hilo || di.s.zero) return e;
    for (int i = 0; i < 16; i++) if (sg * 16384 <= longint'(T[i]) * gm) idx = i;
    a = L[idx] + 2;
    if (int'(di.s.delta) > L[idx]) begin
      longint unsigned v = longint'(di.s.delta) - L[idx] - 1;
      if (v < UM) begin ecw = 64'(1) << v; el = int'(v) + 1; end
      else begin ecw = v << UM; el = DD + UM; end
      sym = L[idx] + 1;
      n_esc++;
    end else sym = int'(di.s.delta);
    if (open_[idx] != 0) begin
      tcw = sym; tl = nbits(idx); open_[idx] = 0;
    end else if (sym == 0) open_[idx] = 1;
    else begin tcw = a - 1 + sym; tl = nbits(idx); end
    if (tl > 0) n_match++;
    e.cw = (HI_CW_W+LE_CW_W)'((ecw << tl) | tcw);
    e.len = LEN_W'(el + tl);
    e.esc_len = LEN_W'(el);
    return e;
  endfunction

  initial begin
    s_data = '0;
    foreach (open_[i]) open_[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      dec_t di;
      int gm, r;
      longint sg;
      di = '0;
      gm = 1 + $urandom % 63;
      sg = (longint'(gm) * ($urandom % 330000)) >> ($urandom % 12) >> 14;
      r = $urandom % 100;
      di.s.gamma = GAMMA_W'(gm);
      di.s.sigma = SIGMA_W'(sg);
      di.s.delta = (r < 60) ? '0 : (r < 85) ? D_MAX'(1 + $urandom % 3) :
                   (r < 98) ? D_MAX'($urandom % 30) : D_MAX'($urandom);
      di.s.zero  = ($urandom % 40 == 0);
      di.s.last  = (n == 2999);
      di.hilo    = !(sg * 16384 <= longint'(T[0]) * gm) || ($urandom % 10 == 0);
      exp_q.push_back(model(di));
      if (di.s.last) begin
      for (int i = 0; i < 16; i++) begin
        flush_code_t f;
        int a;
        a = L[i] + 2;
        f.cw  = LE_CW_W'(open_[i] != 0 ? 2 * a : 2 * a - 1);
        f.len = LE_LEN_W'(nbits(i));
        if (open_[i] != 0) n_open++;
        exp_f.push_back(f);
      end
      end
      s_valid <= 1; s_data <= di;
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    s_valid <= 0;
    repeat (100) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || exp_f.size() != 0 || n_esc == 0 || n_match == 0 || n_open == 0) begin
      failures++;
      $display("FAIL: left %0d/%0d esc %0d match %0d open %0d", exp_q.size(), exp_f.size(), n_esc, n_match, n_open);
    end
    $display("escapes %0d matches %0d open prefixes at tail %0d", n_esc, n_match, n_open);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
