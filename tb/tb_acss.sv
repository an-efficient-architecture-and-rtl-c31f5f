// tb_acss: drives two BIP images (random deltas) into the ACSS unit with
// random output back-pressure and compares every output (delta, Sigma, Gamma,
// zero, rescale, rescale bit, last) and the drained tail accumulators with a
// direct evaluation of the update equations. A third image without
// back-pressure checks the rate of 1 sample/cycle for Nz = 4 > 2.
// Equations and the 1 sample/cycle rate for Nz > 2 are the paper's; the tail
// port and initial-accumulator input are this design's.
module tb_acss;
  import hec_pkg::*;
  localparam int NX_MAX = 8, NY_MAX = 8, NZ_MAX = 8;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [3:0] nx, ny, nz;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, tail_valid, tail_ready = 0;
  logic [D_MAX-1:0] s_delta = '0;
  stats_t m_data;
  logic [SIGMA_W-1:0] tail_sigma;
  int checks = 0, failures = 0, n_rescale = 0;
  bit bp = 1;
  stats_t exp_q[$];
  longint tail_q[$];

  always #5 clk = ~clk;
  acss #(.NX_MAX(NX_MAX), .NY_MAX(NY_MAX), .NZ_MAX(NZ_MAX)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      checks++;
      if (exp_q.size() == 0 || m_data != exp_q[0]) begin
        failures++;
        $display("FAIL: got %p", m_data);
        if (exp_q.size() > 0) $display("      exp %p", exp_q[0]);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (tail_valid && tail_ready) begin
      checks++;
      if (tail_q.size() == 0 || longint'(tail_sigma) != tail_q[0]) begin
        failures++; $display("FAIL: tail %0d", tail_sigma);
      end
      if (tail_q.size() > 0) void'(tail_q.pop_front());
    end
    m_ready    <= bp ? ($urandom % 3 != 0) : 1'b1;
    tail_ready <= bp ? ($urandom % 2 == 0) : 1'b1;
  end

  task automatic image(int inx, int iny, int inz, int dd, int g0, int gs, int si, output int cycles);
    longint sig[8];
    longint gam[8];
    int c = 0;
    nx = 4'(inx); ny = 4'(iny); nz = 4'(inz);
    cfg.d = D_W'(dd); cfg.gamma0 = G0_W'(g0); cfg.gamma_star = GS_W'(gs);
    cfg.sigma_init = SIGMA_W'(si); cfg.umax = UMAX_W'(18);
    for (int t = 0; t < inx * iny; t++)
      for (int z = 0; z < inz; z++) begin
        stats_t e;
        logic [D_MAX-1:0] dv = D_MAX'($urandom % (1 << dd));
        e = '0;
        e.delta = dv;
        e.zero  = (t == 0);
        e.last  = (t == inx * iny - 1) && (z == inz - 1);
        if (t == 0) begin
          sig[z] = si; gam[z] = 1 << g0;
        end else begin
          longint sum = sig[z] + 4 * longint'(dv);
          if (gam[z] == (1 << gs) - 1) begin
            e.rescale = 1; e.rescale_bit = sum[0];
            sig[z] = (sum + 1) / 2; gam[z] = (gam[z] + 1) / 2;
            n_rescale++;
          end else begin
            sig[z] = sum; gam[z] = gam[z] + 1;
          end
        end
        e.sigma = SIGMA_W'(sig[z]);
        e.gamma = GAMMA_W'(gam[z]);
        exp_q.push_back(e);
        s_valid <= 1; s_delta <= dv;
        @(posedge clk); c++;
        while (!s_ready) begin @(posedge clk); c++; end
      end
    s_valid <= 0;
    for (int z = 0; z < inz; z++) tail_q.push_back(sig[z]);
    cycles = c;
    while (tail_q.size() != 0 || exp_q.size() != 0) @(posedge clk);
  endtask

  initial begin
    int cyc;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    image(5, 3, 4, 10, 1, 4, 7, cyc);
    image(8, 8, 8, 16, 0, 6, 0, cyc);
    image(8, 8, 3, 14, 1, 4, 13, cyc);   // frequent rescales, odd initial value
    bp = 0;
    repeat (3) @(posedge clk);
    image(5, 3, 4, 12, 1, 5, 3, cyc);
    checks++;
    if (cyc != 60) begin failures++; $display("FAIL: 60 samples took %0d cycles", cyc); end
    checks++;
    if (n_rescale == 0) begin failures++; $display("FAIL: no rescale"); end
    $display("rescales %0d, last image %0d cycles", n_rescale, cyc);
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
