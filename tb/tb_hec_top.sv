// tb_hec_top: end-to-end test of the hybrid entropy coder at reduced image
// maxima (8 x 8 x 8). Codes a series of images with different run-time
// configurations and data statistics, with random input gaps and output
// back-pressure, and compares every 64-bit output word with the reference
// model of hec_ref_pkg. One image runs without gaps or back-pressure and its
// cycle count is checked against N + 16 + Nz + escapes + a fixed pipeline
// latency. Every mechanism of the coder (high- and low-entropy coding,
// escapes, codeword matches, counter rescale, unary-limit codes, flush from an
// inner tree node, output stall, loop-controller stall for Nz = 2,
// back-to-back images) is counted, and one that never occurs is a failure.
// The rate formula is the paper's; the reduced maxima and the stand-in code
// tables are this design's.
module tb_hec_top;
  import hec_pkg::*;
  import hec_ref_pkg::*;

  localparam int NX_MAX = 8, NY_MAX = 8, NZ_MAX = 8;
  localparam int LAT = 20;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic [$clog2(NX_MAX+1)-1:0] nx;
  logic [$clog2(NY_MAX+1)-1:0] ny;
  logic [$clog2(NZ_MAX+1)-1:0] nz;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_last;
  logic [D_MAX-1:0] s_delta = '0;
  logic [PKT_W-1:0] m_data;

  int checks = 0, failures = 0;
  int n_high = 0, n_low = 0, n_esc = 0, n_match = 0, n_rescale = 0, n_umax = 0;
  int n_flush_inner = 0, n_out_stall = 0, n_loop_stall = 0, n_images = 0, n_esc2 = 0;
  longint cyc = 0;
  bit bp_on = 1, gaps_on = 1;
  hec_ref model;
  longint unsigned exp_w[$];
  bit exp_l[$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  hec_top #(.NX_MAX(NX_MAX), .NY_MAX(NY_MAX), .NZ_MAX(NZ_MAX)) dut (
    .clk, .rst_n, .cfg, .nx, .ny, .nz, .s_valid, .s_ready, .s_delta,
    .m_valid, .m_ready, .m_data, .m_last);

  // output checker and back-pressure
  int words_seen = 0;
  bit got_last = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (m_valid && !m_ready) n_out_stall++;
      if (s_valid && !dut.u_acss.u_lc.dep_ok && !dut.u_acss.busy_q) n_loop_stall++;
      if (dut.u_comb.state_q == 2'd1 && dut.u_comb.consume) n_esc2++;
      if (m_valid && m_ready) begin
        checks++;
        if (exp_w.size() == 0) begin
          failures++;
          $display("FAIL: unexpected word %h", m_data);
        end else begin
          if (m_data !== exp_w[0] || m_last !== exp_l[0]) begin
            failures++;
            if (failures < 10)
              $display("FAIL word %0d: got %h last %0b exp %h last %0b", words_seen,
                       m_data, m_last, exp_w[0], exp_l[0]);
          end
          void'(exp_w.pop_front());
          void'(exp_l.pop_front());
        end
        words_seen++;
        if (m_last) got_last = 1;
      end
      m_ready <= bp_on ? ($urandom % 4 != 0) : 1'b1;
    end
  end

  function automatic logic [D_MAX-1:0] gen_delta(int t, int dd, int style);
    int r = $urandom % 100;
    logic [D_MAX-1:0] mask = (D_MAX'(1) << dd) - 1;
    bit low = (style == 0) ? ((t / 6) % 2 == 0) : (style == 1);
    if (low) begin
      if (r < 78) return 0;
      if (r < 90) return D_MAX'(1 + $urandom % 2);
      if (r < 97) return D_MAX'(3 + $urandom % 12) & mask;
      return D_MAX'($urandom) & mask;
    end else begin
      int w = $urandom % (dd + 1);
      if (r < 5) return mask;
      return D_MAX'($urandom) & ((D_MAX'(1) << w) - 1) & mask;
    end
  endfunction

  function automatic void drain_model();
    while (model.words.size() > 0) begin
      exp_w.push_back(model.words.pop_front());
      exp_l.push_back(model.word_last.pop_front());
    end
  endfunction

  task automatic run_image(int inx, int iny, int inz, int dd, int um, int g0, int gs,
                           int si, int style, bit timed);
    longint c0, c1;
    int n = inx * iny * inz;
    int esc0;
    wait (!s_valid);
    cfg.d = D_W'(dd); cfg.umax = UMAX_W'(um); cfg.gamma0 = G0_W'(g0);
    cfg.gamma_star = GS_W'(gs); cfg.sigma_init = SIGMA_W'(si);
    nx = $bits(nx)'(inx); ny = $bits(ny)'(iny); nz = $bits(nz)'(inz);
    model = new(dd, um, g0, gs, inz, longint'(si));
    bp_on = !timed; gaps_on = !timed;
    got_last = 0;
    esc0 = n_esc2;
    @(posedge clk);
    c0 = -1;
    for (int t = 0; t < inx * iny; t++) begin
      for (int z = 0; z < inz; z++) begin
        logic [D_MAX-1:0] dv = gen_delta(t, dd, style);
        model.sample(z, longint'(dv), t == 0);
        drain_model();
        while (gaps_on && ($urandom % 5 == 0)) begin
          s_valid <= 0;
          @(posedge clk);
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
    drain_model();
    while (!got_last) @(posedge clk);
    c1 = cyc;
    n_high += model.n_high; n_low += model.n_low; n_esc += model.n_esc;
    n_match += model.n_match; n_rescale += model.n_rescale; n_umax += model.n_umax;
    n_images++;
    if (timed) begin
      longint budget = longint'(n) + 16 + inz + (n_esc2 - esc0) + LAT;
      checks++;
      $display("timed image: %0d samples, %0d escapes, %0d cycles (budget %0d)",
               n, n_esc2 - esc0, c1 - c0, budget);
      if (c1 - c0 > budget || c1 - c0 < n) begin
        failures++;
        $display("FAIL: cycle count %0d outside [%0d, %0d]", c1 - c0, n, budget);
      end
    end
    checks++;
    if (exp_w.size() != 0) begin
      failures++;
      $display("FAIL: %0d expected words missing", exp_w.size());
      exp_w.delete(); exp_l.delete();
    end
  endtask

  // inner-node flush: count codes left holding a prefix at the image end
  always @(posedge clk)
    if (rst_n && dut.u_loec.u_ctl.flush_valid && dut.u_loec.u_ctl.flush_ready &&
        dut.u_loec.u_ctl.ct_addr_q[dut.u_loec.u_ctl.fidx_q] !=
        ct_root(int'(dut.u_loec.u_ctl.fidx_q)))
      n_flush_inner++;

  initial begin
    cfg = '0; nx = 0; ny = 0; nz = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    //        nx ny nz  D Umax g0 g* sigma_init style timed
    run_image(8, 8, 8, 16, 18, 1, 6, 0,    0, 0);
    run_image(8, 8, 8, 16, 18, 1, 6, 0,    0, 1);
    run_image(5, 7, 3, 12,  8, 1, 4, 101,  1, 0);
    run_image(8, 3, 6,  8, 10, 0, 5, 9,    2, 0);
    run_image(4, 4, 2, 16, 18, 1, 6, 0,    0, 0);
    run_image(8, 8, 8,  4,  8, 1, 6, 0,    0, 0);
    run_image(6, 6, 8, 16, 16, 1, 6, 0,    1, 1);
    repeat (5) @(posedge clk);
    $display("mechanisms: high=%0d low=%0d escape=%0d esc_beats=%0d match=%0d rescale=%0d umax=%0d",
             n_high, n_low, n_esc, n_esc2, n_match, n_rescale, n_umax);
    $display("            inner_flush=%0d out_stall=%0d loop_stall=%0d images=%0d",
             n_flush_inner, n_out_stall, n_loop_stall, n_images);
    checks++; if (n_high == 0)        begin failures++; $display("FAIL: no high-entropy sample"); end
    checks++; if (n_low == 0)         begin failures++; $display("FAIL: no low-entropy sample"); end
    checks++; if (n_esc == 0 || n_esc2 != n_esc) begin failures++; $display("FAIL: escapes %0d vs beats %0d", n_esc, n_esc2); end
    checks++; if (n_match == 0)       begin failures++; $display("FAIL: no codeword match"); end
    checks++; if (n_rescale == 0)     begin failures++; $display("FAIL: no rescale"); end
    checks++; if (n_umax == 0)        begin failures++; $display("FAIL: no unary-limit code"); end
    checks++; if (n_flush_inner == 0) begin failures++; $display("FAIL: no inner-node flush"); end
    checks++; if (n_out_stall == 0)   begin failures++; $display("FAIL: no output stall"); end
    checks++; if (n_loop_stall == 0)  begin failures++; $display("FAIL: no loop-controller stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
