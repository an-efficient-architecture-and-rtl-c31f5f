// tb_hec_full: the coder at its default build-time maxima (680 x 512 x 224,
// D = 16, Umax = 18, gamma0 = 1, gamma* = 6), i.e. hec_top with no parameter
// overrides. It codes one complete image of the full size, Nx = 680,
// Ny = NY_RUN = 512, Nz = 224 (78 million samples, about two minutes of
// simulation; NY_RUN can be lowered for a quick run). Deltas alternate
// between low- and high-entropy stretches, so both coders, escapes and
// rescales occur. Every output word is compared with the reference model.
// Without gaps or back-pressure, the run must take no more than
// N + 16 + Nz + escapes + 20 cycles (one sample per cycle).
// Sizes and the one-sample-per-cycle rate with 16 + Nz tail cycles and one
// extra cycle per escape are the paper's.
module tb_hec_full;
  import hec_pkg::*;
  import hec_ref_pkg::*;

  localparam int NX = 680, NZ = 224, NY_RUN = 512;
  localparam int LAT = 20;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [$clog2(680+1)-1:0] nx;
  logic [$clog2(512+1)-1:0] ny;
  logic [$clog2(224+1)-1:0] nz;
  logic s_valid = 0, s_ready, m_valid, m_last;
  logic m_ready = 1;
  logic [D_MAX-1:0] s_delta = '0;
  logic [PKT_W-1:0] m_data;

  int checks = 0, failures = 0, n_esc2 = 0;
  longint cyc = 0;
  hec_ref model;
  longint unsigned exp_w[$];
  bit exp_l[$];
  bit got_last = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  hec_top dut (
    .clk, .rst_n, .cfg, .nx, .ny, .nz, .s_valid, .s_ready, .s_delta,
    .m_valid, .m_ready, .m_data, .m_last);

  always @(posedge clk) if (rst_n) begin
    if (dut.u_comb.state_q == 2'd1 && dut.u_comb.consume) n_esc2++;
    if (m_valid && m_ready) begin
      checks++;
      if (exp_w.size() == 0 || m_data !== exp_w[0] || m_last !== exp_l[0]) begin
        failures++;
        if (failures < 10) $display("FAIL: word %h last %0b", m_data, m_last);
      end
      if (exp_w.size() > 0) begin void'(exp_w.pop_front()); void'(exp_l.pop_front()); end
      if (m_last) got_last = 1;
    end
  end

  function automatic logic [D_MAX-1:0] gen_delta(int t);
    int r;
    r = $urandom % 100;
    if ((t / 1500) % 2 == 1) begin
      if (r < 80) return 0;
      if (r < 92) return D_MAX'(1 + $urandom % 2);
      if (r < 99) return D_MAX'(3 + $urandom % 12);
      return D_MAX'($urandom);
    end
    return D_MAX'($urandom) & ((D_MAX'(1) << ($urandom % 17)) - 1);
  endfunction

  initial begin
    longint c0, c1, n, budget;
    cfg.d = D_W'(16); cfg.umax = UMAX_W'(18); cfg.gamma0 = G0_W'(1);
    cfg.gamma_star = GS_W'(6); cfg.sigma_init = '0;
    nx = $bits(nx)'(NX); ny = $bits(ny)'(NY_RUN); nz = $bits(nz)'(NZ);
    model = new(16, 18, 1, 6, NZ, 0);
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    c0 = -1;
    for (int t = 0; t < NX * NY_RUN; t++) begin
      for (int z = 0; z < NZ; z++) begin
        logic [D_MAX-1:0] dv;
        dv = gen_delta(t);
        model.sample(z, longint'(dv), t == 0);
        while (model.words.size() > 0) begin
          exp_w.push_back(model.words.pop_front());
          exp_l.push_back(model.word_last.pop_front());
        end
        s_valid <= 1;
        s_delta <= dv;
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        if (c0 < 0) c0 = cyc;
      end
    end
    s_valid <= 0;
    model.tail();
    while (model.words.size() > 0) begin
      exp_w.push_back(model.words.pop_front());
      exp_l.push_back(model.word_last.pop_front());
    end
    while (!got_last) @(posedge clk);
    c1 = cyc;
    repeat (5) @(posedge clk);
    n = longint'(NX) * NY_RUN * NZ;
    budget = n + 16 + NZ + n_esc2 + LAT;
    $display("%0d samples, %0d escapes, %0d cycles (budget %0d); high %0d low %0d rescale %0d",
             n, n_esc2, c1 - c0, budget, model.n_high, model.n_low, model.n_rescale);
    checks++;
    if (c1 - c0 > budget) begin failures++; $display("FAIL: too slow"); end
    checks++;
    if (exp_w.size() != 0 || n_esc2 != model.n_esc || model.n_high == 0 || model.n_low == 0 ||
        model.n_rescale == 0) begin
      failures++;
      $display("FAIL: %0d words missing, escapes %0d/%0d", exp_w.size(), n_esc2, model.n_esc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
