// tb_vlc_packer: random codewords of 0..64 bits (with garbage above their
// length) into the packer under random output stalls, in three streams; the
// reference appends the bits MSB-first to a bit queue and cuts 64-bit words,
// zero padding the last. Checks every word and its last flag, and that a
// stream of 64-bit codewords is accepted at one per cycle.
// The 64-bit packet width is the paper's; bit order and zero padding are
// this design's.
module tb_vlc_packer;
  import hec_pkg::*;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  code_t s_data;
  packet_t m_data;
  int checks = 0, failures = 0;
  bit bits[$];
  longint unsigned exp_w[$];
  bit exp_l[$];
  bit bp = 1;

  always #5 clk = ~clk;
  vlc_packer dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      if (exp_w.size() == 0 || m_data.data != exp_w[0] || m_data.last != exp_l[0]) begin
        failures++;
        $display("FAIL: %h/%0b", m_data.data, m_data.last);
        if (exp_w.size() > 0) $display("  exp %h/%0b", exp_w[0], exp_l[0]);
      end
      if (exp_w.size() > 0) begin void'(exp_w.pop_front()); void'(exp_l.pop_front()); end
    end
    m_ready <= bp ? ($urandom % 3 != 0) : 1'b1;
  end

  function automatic void cut(bit fin);
    while (bits.size() >= 64 || (fin && bits.size() > 0)) begin
      longint unsigned w = 0;
      for (int b = 0; b < 64; b++) w = (w << 1) | ((bits.size() > 0) ? longint'(bits.pop_front()) : 0);
      exp_w.push_back(w);
      exp_l.push_back(fin && bits.size() == 0);
    end
  endfunction

  task automatic stream(int n, bit full_len, output int cycles);
    int c = 0;
    for (int i = 0; i < n; i++) begin
      code_t cw;
      int len = full_len ? 64 : (($urandom % 4 == 0) ? $urandom % 65 : $urandom % 12);
      cw.cw = {$urandom, $urandom};
      cw.len = LEN_W'(len);
      cw.last = (i == n - 1);
      if (cw.last && len == 0) cw.len = LEN_W'(5);
      for (int b = int'(cw.len) - 1; b >= 0; b--) bits.push_back(cw.cw[b]);
      cut(cw.last);
      s_valid <= 1; s_data <= cw;
      @(posedge clk); c++;
      while (!s_ready) begin @(posedge clk); c++; end
    end
    s_valid <= 0;
    cycles = c;
    while (exp_w.size() != 0) @(posedge clk);
  endtask

  initial begin
    int c;
    s_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    stream(500, 0, c);
    stream(3, 0, c);
    stream(300, 0, c);
    bp = 0;
    repeat (3) @(posedge clk);
    stream(100, 1, c);
    checks++;
    if (c != 100) begin failures++; $display("FAIL: 100 full words took %0d cycles", c); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
