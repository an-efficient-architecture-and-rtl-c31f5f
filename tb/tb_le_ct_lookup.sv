// tb_le_ct_lookup: the code-table lookup loaded with the small example table
// (5 codewords over the symbols 0, 1 and escape X with L = 1, two flush
// words). Walks every input codeword on separate code indices, including two
// escapes (one short, one over the unary limit) and back-to-back symbols of
// one code, checks the emitted codewords, lengths and escape prefixes, that an
// inactive sample emits nothing and moves no pointer, and that the image tail
// sends the 16 flush words (the code left at prefix "1" sends 2'h1, the others
// the root flush 1'h0).
// The example table and the one-cycle lookup loop are the paper's; field
// widths are this design's.
module tb_le_ct_lookup;
  import hec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1, flush_valid, flush_ready = 1;
  le_sym_t s_data;
  le_code_t m_data;
  flush_code_t flush_data;
  int checks = 0, failures = 0;
  le_code_t exp_q[$];
  flush_code_t exp_f[$];

  always #5 clk = ~clk;

  le_ct_lookup #(.CT_INIT_FILE("tb/ct_example.hex"), .ROOT('0)) dut (
    .clk, .rst_n, .d(D_W'(8)), .umax(UMAX_W'(8)), .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data, .flush_valid, .flush_ready, .flush_data);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0 || m_data != exp_q[0]) begin
        failures++;
        $display("FAIL: cw %h len %0d esc %0d", m_data.cw, m_data.len, m_data.esc_len);
        if (exp_q.size() > 0) $display("  exp cw %h len %0d esc %0d", exp_q[0].cw, exp_q[0].len, exp_q[0].esc_len);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (flush_valid && flush_ready) begin
      checks++;
      if (exp_f.size() == 0 || flush_data != exp_f[0]) begin
        failures++; $display("FAIL: flush %h len %0d", flush_data.cw, flush_data.len);
      end
      if (exp_f.size() > 0) void'(exp_f.pop_front());
    end
  end

  function automatic le_code_t code(longint cw, int len, int esc);
    le_code_t c;
    c.cw = (HI_CW_W+LE_CW_W)'(cw); c.len = LEN_W'(len); c.esc_len = LEN_W'(esc);
    return c;
  endfunction

  task automatic sym(int idx, int delta, bit active, bit last, le_code_t e);
    le_sym_t s = '0;
    s.c.delta  = D_MAX'(delta);
    s.c.idx    = CI_W'(idx);
    s.c.lim    = SYM_W'(1);
    s.c.active = active;
    s.c.last   = last;
    s.iota     = (delta <= 1) ? SYM_W'(delta) : SYM_W'(2);
    exp_q.push_back(e);
    s_valid <= 1; s_data <= s;
    @(posedge clk);
    while (!s_ready) @(posedge clk);
  endtask

  initial begin
    s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    sym(0, 0, 1, 0, code(64'hA, 4, 0));                        // "0"  -> 4'hA
    sym(1, 1, 1, 0, code(0, 0, 0));                            // "1"  pending
    sym(1, 0, 1, 0, code(64'hC, 4, 0));                        // "10" -> 4'hC
    sym(2, 5, 1, 0, code((64'b1000 << 5) | 64'hB, 9, 4));      // "X": R'0(3)=1000, 5'hB
    sym(3, 1, 1, 0, code(0, 0, 0));                            // "1"
    sym(3, 1, 1, 0, code(64'hD, 8, 0));                        // "11" -> 8'hD (back to back)
    sym(4, 1, 1, 0, code(0, 0, 0));                            // "1"
    sym(4, 0, 0, 0, code(0, 0, 0));                            // inactive: no move
    sym(4, 2, 1, 0, code((64'b1 << 6) | 64'hE, 7, 1));         // "1X": R'0(0)=1, 6'hE
    sym(6, 200, 1, 0, code((64'd198 << 13) | 64'hB, 21, 16));  // X over the unary limit
    sym(5, 1, 1, 1, code(0, 0, 0));                            // "1" left open, last
    s_valid <= 0;
    for (int i = 0; i < 16; i++) begin
      flush_code_t f;
      f.cw  = (i == 5) ? LE_CW_W'(1) : '0;
      f.len = (i == 5) ? LE_LEN_W'(2) : LE_LEN_W'(1);
      exp_f.push_back(f);
    end
    repeat (30) @(posedge clk);
    // after the tail all pointers are back at the root: "0" on code 5 -> 4'hA
    sym(5, 0, 1, 0, code(64'hA, 4, 0));
    s_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || exp_f.size() != 0) begin
      failures++; $display("FAIL: %0d codes, %0d flushes missing", exp_q.size(), exp_f.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
