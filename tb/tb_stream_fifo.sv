// tb_stream_fifo: the decision-flags side-channel queue. Random pushes and pops
// against a reference queue; checks order, the occupancy count, that it fills
// to exactly DEPTH entries (non power-of-two depth) and refuses more.
// The side-channel is in the paper's top-level diagram; its depth is this
// design's.
module tb_stream_fifo;
  localparam int DEPTH = 6;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0] s_data = '0, m_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [7:0] ref_q[$];
  bit pop_en = 1;

  always #5 clk = ~clk;
  stream_fifo #(.T(logic [7:0]), .DEPTH(DEPTH)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != ref_q.size()) begin
      failures++; $display("FAIL: count %0d ref %0d", count, ref_q.size());
    end
    if (m_valid && m_ready) begin
      checks++;
      if (m_data != ref_q[0]) begin failures++; $display("FAIL: data %h exp %h", m_data, ref_q[0]); end
      void'(ref_q.pop_front());
    end
    if (s_valid && s_ready) ref_q.push_back(s_data);
    m_ready <= pop_en && ($urandom % 2 == 0);
    s_valid <= ($urandom % 3 != 0);
    s_data  <= 8'($urandom);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    pop_en = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (count != 3'(DEPTH) || s_ready) begin failures++; $display("FAIL: not full at DEPTH"); end
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
