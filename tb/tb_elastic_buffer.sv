// tb_elastic_buffer: random source gaps and sink stalls through one elastic
// buffer; every item must come out once, in order, unchanged, and with both
// sides always ready the buffer must pass one item per cycle.
// Full throughput of the elastic buffers is the paper's claim; the skid
// structure is this design's.
module tb_elastic_buffer;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [15:0] s_data = '0, m_data;
  int checks = 0, failures = 0;
  logic [15:0] sent[$];
  int n_out = 0;
  bit rand_sink = 1;

  always #5 clk = ~clk;

  elastic_buffer #(.T(logic [15:0])) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      n_out++;
      if (sent.size() == 0 || m_data != sent[0]) begin
        failures++;
        $display("FAIL: got %h", m_data);
      end
      if (sent.size() > 0) void'(sent.pop_front());
    end
    m_ready <= rand_sink ? ($urandom % 3 != 0) : 1'b1;
  end

  task automatic send(int n, bit gaps);
    for (int i = 0; i < n; i++) begin
      logic [15:0] v = 16'($urandom);
      while (gaps && $urandom % 4 == 0) begin s_valid <= 0; @(posedge clk); end
      s_valid <= 1; s_data <= v;
      sent.push_back(v);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    s_valid <= 0;
  endtask

  initial begin
    int c0, o0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    send(2000, 1);
    repeat (10) @(posedge clk);
    rand_sink = 0;
    repeat (3) @(posedge clk);
    o0 = n_out;
    send(100, 0);
    repeat (2) @(posedge clk);
    checks++;
    if (n_out - o0 != 100 || sent.size() != 0) begin
      failures++;
      $display("FAIL: %0d items out, %0d left", n_out - o0, sent.size());
    end
    // full rate: 100 items must take 100 cycles of input
    c0 = 0;
    fork
      send(100, 0);
      begin @(posedge clk); while (s_valid) begin c0++; @(posedge clk); end end
    join
    checks++;
    if (c0 > 101) begin failures++; $display("FAIL: %0d cycles for 100 items", c0); end
    repeat (5) @(posedge clk);
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
