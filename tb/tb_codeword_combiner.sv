// tb_codeword_combiner: drives the five input streams of the combiner
// (decision flags, high-entropy code, low-entropy code, flush codes, final
// accumulators) from independent queues with random valid gaps, holding each
// offered item until it is taken, and applies random output stalls. Random
// samples cover t = 0, high entropy, low entropy with and without escape,
// prefix-only samples (nothing sent) and rescaling, in images of varying Nz,
// including flush words of length 0 (skipped). The reference expands each
// sample to its expected codeword beats (rescale bit in front of the first,
// escape split in two) and the tail to 16 flush words plus Nz accumulators of
// 2 + D + gamma* bits, the last one marked. Also checks that an image with no
// escapes and no stalls is accepted at one sample per cycle.
// The per-sample selection and tail order are the paper's; the beat
// structure checked here is this design's.
module tb_codeword_combiner;
  import hec_pkg::*;
  localparam int NZM = 8;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [$clog2(NZM+1)-1:0] nz;
  logic flags_valid = 0, flags_ready, hi_valid = 0, hi_ready, le_valid = 0, le_ready;
  logic flush_valid = 0, flush_ready, tail_valid = 0, tail_ready, m_valid, m_ready = 0;
  flags_t flags;
  hi_code_t hi_code;
  le_code_t le_code;
  flush_code_t flush_code;
  logic [SIGMA_W-1:0] tail_sigma;
  code_t m_data;
  int checks = 0, failures = 0, n_esc = 0, n_resc = 0, n_skip = 0;
  bit gaps = 1;

  flags_t qf[$];
  hi_code_t qh[$];
  le_code_t ql[$];
  flush_code_t qfl[$];
  logic [SIGMA_W-1:0] qt[$];
  code_t exp_q[$];

  always #5 clk = ~clk;
  codeword_combiner #(.NZ_MAX(NZM)) dut (.*);

  // input drivers: offer the queue head with random gaps, hold until taken
  always @(posedge clk) if (rst_n) begin
    if (flags_valid && flags_ready) void'(qf.pop_front());
    if (hi_valid && hi_ready)       void'(qh.pop_front());
    if (le_valid && le_ready)       void'(ql.pop_front());
    if (flush_valid && flush_ready) void'(qfl.pop_front());
    if (tail_valid && tail_ready)   void'(qt.pop_front());
  end
  always @(posedge clk) if (rst_n) begin
    #1;
    if (!flags_valid || flags_ready_q) begin flags_valid <= qf.size() > 0 && (!gaps || $urandom % 4 != 0); if (qf.size() > 0) flags <= qf[0]; end
    if (!hi_valid || hi_ready_q)       begin hi_valid <= qh.size() > 0 && (!gaps || $urandom % 4 != 0); if (qh.size() > 0) hi_code <= qh[0]; end
    if (!le_valid || le_ready_q)       begin le_valid <= ql.size() > 0 && (!gaps || $urandom % 4 != 0); if (ql.size() > 0) le_code <= ql[0]; end
    if (!flush_valid || flush_ready_q) begin flush_valid <= qfl.size() > 0 && (!gaps || $urandom % 4 != 0); if (qfl.size() > 0) flush_code <= qfl[0]; end
    if (!tail_valid || tail_ready_q)   begin tail_valid <= qt.size() > 0 && (!gaps || $urandom % 4 != 0); if (qt.size() > 0) tail_sigma <= qt[0]; end
    m_ready <= !gaps || ($urandom % 3 != 0);
  end
  // handshake of the edge just passed
  logic flags_ready_q, hi_ready_q, le_ready_q, flush_ready_q, tail_ready_q;
  always @(posedge clk) begin
    flags_ready_q <= flags_ready; hi_ready_q <= hi_ready; le_ready_q <= le_ready;
    flush_ready_q <= flush_ready; tail_ready_q <= tail_ready;
  end

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    code_t e;
    checks++;
    e = exp_q.size() > 0 ? exp_q[0] : '0;
    if (exp_q.size() == 0 || m_data.len != e.len || m_data.last != e.last ||
        (m_data.cw & ((64'(1) << m_data.len) - 1)) != (e.cw & ((64'(1) << e.len) - 1))) begin
      failures++;
      $display("FAIL: %h/%0d/%0b exp %h/%0d/%0b", m_data.cw, m_data.len, m_data.last, e.cw, e.len, e.last);
    end
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  function automatic code_t mk(longint unsigned cw, int len, bit last = 0);
    code_t c;
    c.cw = cw; c.len = LEN_W'(len); c.last = last;
    return c;
  endfunction

  task automatic image(int n, bit allow_esc);
    for (int i = 0; i < n; i++) begin
      flags_t f;
      hi_code_t h;
      le_code_t l;
      int r, hl, tl, el;
      longint unsigned fcw, first;
      int flen;
      r = $urandom % 100;
      f.zero = (r < 5);
      f.hilo = (r >= 5 && r < 40);
      f.rescale = ($urandom % 8 == 0);
      f.rescale_bit = $urandom;
      f.last = (i == n - 1);
      hl = 1 + $urandom % HI_CW_W;
      h.cw = {$urandom, $urandom};
      h.len = LEN_W'(hl);
      tl = ($urandom % 3 == 0) ? 0 : 3 + $urandom % 3;
      el = (allow_esc && $urandom % 4 == 0) ? 1 + $urandom % HI_CW_W : 0;
      if (el > 0 && tl == 0) tl = 4;
      l.cw = (HI_CW_W+LE_CW_W)'({$urandom, $urandom}) & ((64'(1) << (el + tl)) - 1);
      l.len = LEN_W'(el + tl);
      l.esc_len = LEN_W'(el);
      qf.push_back(f); qh.push_back(h); ql.push_back(l);
      if (f.zero || f.hilo) begin first = h.cw & ((64'(1) << hl) - 1); flen = hl; end
      else if (el > 0) begin first = l.cw >> tl; flen = el; n_esc++; end
      else begin first = l.cw; flen = tl; end
      if (f.rescale) begin first = first | (64'(f.rescale_bit) << flen); flen++; n_resc++; end
      if (flen > 0) exp_q.push_back(mk(first, flen));
      else n_skip++;
      if (!f.zero && !f.hilo && el > 0) exp_q.push_back(mk(l.cw & ((64'(1) << tl) - 1), tl));
    end
    for (int i = 0; i < 16; i++) begin
      flush_code_t fc;
      fc.len = ($urandom % 5 == 0) ? '0 : LE_LEN_W'(1 + $urandom % 16);
      fc.cw = LE_CW_W'($urandom) & LE_CW_W'((32'(1) << fc.len) - 1);
      qfl.push_back(fc);
      if (fc.len != 0) exp_q.push_back(mk(fc.cw, fc.len));
    end
    for (int z = 0; z < int'(nz); z++) begin
      logic [SIGMA_W-1:0] s;
      s = SIGMA_W'($urandom) & SIGMA_W'((32'(1) << (2 + cfg.d + cfg.gamma_star)) - 1);
      qt.push_back(s);
      exp_q.push_back(mk(s, 2 + cfg.d + cfg.gamma_star, z == int'(nz) - 1));
    end
  endtask

  task automatic wait_done();
    while (exp_q.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  initial begin
    int t0, t1;
    cfg = '0; cfg.d = D_W'(16); cfg.gamma_star = GS_W'(6);
    nz = 3;
    flags = '0; hi_code = '0; le_code = '0; flush_code = '0; tail_sigma = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    image(300, 1); wait_done();
    nz = 1; cfg.d = D_W'(8); cfg.gamma_star = GS_W'(4);
    image(100, 1); wait_done();
    nz = 8;
    image(5, 1); wait_done();
    // rate: no escapes, no gaps, no stalls: 200 samples + 16 + nz words
    gaps = 0;
    @(posedge clk);
    t0 = $time;
    image(200, 0);
    wait_done();
    t1 = ($time - t0) / 10 - 5;
    checks++;
    if (t1 > 200 + 16 + 8 + 6) begin failures++; $display("FAIL: rate, %0d cycles", t1); end
    $display("cycles for 200 samples + tail: %0d; escapes %0d rescales %0d silent %0d", t1, n_esc, n_resc, n_skip);
    checks++;
    if (n_esc == 0 || n_resc == 0 || n_skip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
