// tb_loop_controller: builds the filter y(t) = x(t) + y(t-K) around the loop
// controller (2 elastic stages forward, a queue as feedback path, the first K
// inputs use y = 0) and checks every output against the recurrence and the
// sustained rate: K/3 samples/cycle for K <= 2, 1 sample/cycle for K > 2.
// The paper quotes N/(M+N) (Nz/(Nz+2)) for small K; this queue-based loop
// gives K/3, which is what is checked.
module tb_loop_controller;
  logic clk = 0, rst_n = 0;
  logic [3:0] k_size;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic ffw_in_valid, ffw_in_ready, ffw_in_prime, ffw_out_valid, ffw_out_ready;
  logic fb_in_valid, fb_in_ready, fb_out_valid, fb_out_ready;
  logic [15:0] x = '0, a_d, a_q, y_q, fb_head;
  logic a_v, a_r;
  logic [3:0] qc;
  logic restart = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  loop_controller #(.LS_W(4)) dut (
    .clk, .rst_n, .loop_size(k_size), .hold(1'b0), .restart,
    .in_valid, .in_ready, .ffw_in_valid, .ffw_in_ready, .ffw_in_prime,
    .ffw_out_valid, .ffw_out_ready, .fb_in_valid, .fb_in_ready,
    .fb_out_valid, .fb_out_ready, .out_valid, .out_ready);

  assign a_d = x + (ffw_in_prime ? 16'd0 : fb_head);
  elastic_buffer #(.T(logic [15:0])) u_s1 (.clk, .rst_n, .s_valid(ffw_in_valid), .s_ready(ffw_in_ready),
    .s_data(a_d), .m_valid(a_v), .m_ready(a_r), .m_data(a_q));
  elastic_buffer #(.T(logic [15:0])) u_s2 (.clk, .rst_n, .s_valid(a_v), .s_ready(a_r),
    .s_data(a_q), .m_valid(ffw_out_valid), .m_ready(ffw_out_ready), .m_data(y_q));
  stream_fifo #(.T(logic [15:0]), .DEPTH(8)) u_q (.clk, .rst_n, .s_valid(fb_in_valid), .s_ready(fb_in_ready),
    .s_data(y_q), .m_valid(fb_out_valid), .m_ready(fb_out_ready), .m_data(fb_head), .count(qc));

  logic [15:0] xs[$], ys[$];
  int n_out;
  int kcur = 3;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [15:0] e;
    int t;
    t = n_out;
    e = xs[t];
    if (t >= kcur) e = e + ys[t - kcur];
    ys.push_back(e);
    checks++;
    if (y_q != e) begin failures++; $display("FAIL: t=%0d y=%0d exp %0d", t, y_q, e); end
    n_out++;
  end

  task automatic run(int k, int n);
    int c0;
    k_size = 4'(k);
    kcur = k;
    restart <= 1; @(posedge clk); restart <= 0;
    xs.delete(); ys.delete(); n_out = 0;
    c0 = 0;
    for (int i = 0; i < n; i++) begin
      logic [15:0] v = 16'($urandom % 1000);
      xs.push_back(v);
      in_valid <= 1; x <= v;
      @(posedge clk); c0++;
      while (!in_ready) begin @(posedge clk); c0++; end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != n) begin failures++; $display("FAIL: K=%0d %0d outputs", k, n_out); end
    // cycles per sample: 3/K when K <= 2 (loop latency = 2 forward stages plus
    // the queue write), 1 otherwise
    checks++;
    if (k <= 2) begin
      if (c0 < (n * 3) / k - 4 || c0 > (n * 3) / k + 4) begin
        failures++; $display("FAIL: K=%0d took %0d cycles", k, c0);
      end
    end else if (c0 > n + 2) begin
      failures++; $display("FAIL: K=%0d took %0d cycles", k, c0);
    end
    $display("K=%0d: %0d samples in %0d cycles", k, n, c0);
    // clear the queue left by this run
    rst_n = 0; @(posedge clk); rst_n = 1; @(posedge clk);
  endtask

  initial begin
    k_size = 4'd3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run(1, 60);
    run(2, 60);
    run(3, 60);
    run(7, 70);
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
