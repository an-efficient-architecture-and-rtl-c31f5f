// acss: Adaptive Code Selection Statistics unit, BIP sample order.
//
// For every mapped quantizer index delta_z(t) it updates the band's
// high-resolution accumulator and the counter:
//   sum = Sigma_z(t-1) + 4*delta_z(t)
//   Gamma(t-1) <  2^g*-1 : Sigma_z(t) = sum,             Gamma(t) = Gamma(t-1)+1
//   Gamma(t-1) == 2^g*-1 : Sigma_z(t) = floor((sum+1)/2), Gamma(t) = floor((Gamma(t-1)+1)/2)
// and passes delta, Sigma, Gamma and the flags zero (t = 0), rescale, the
// rescale bit (LSB of sum, dropped by the halving) and last downstream. At
// t = 0 the statistics take their initial values, Gamma = 2^gamma0 and
// Sigma = cfg.sigma_init, and the sample is not counted.
//
// Structure: a 2-stage feed-forward path (operand register, result register)
// and a feedback queue of NZ_MAX entries that returns each band's
// (Sigma, Gamma) when the same band of the next pixel arrives; in BIP order
// the loop distance is Nz, so for Nz > 2 it runs at 1 sample/cycle and the
// loop controller only stalls when Nz <= 2. The counter is common to all
// bands of a pixel; it travels through the queue with each band's accumulator.
// After the last sample of the image has been written back, the queue holds
// the final accumulator of every band: it is then emptied, band 0 first, on
// the tail port (used for the compressed image tail) and the unit restarts.
//
// Timing: 2 cycles from s to m. Input is refused from the last sample until
// the tail has been read out. Image size (nx, ny, nz) and cfg must stay
// constant during an image. The initial accumulator value is a configuration
// input of this implementation.
//
// From the paper: the BIP structure (accumulators of all bands in a queue that
// also delays the counter, 2 feed-forward stages, loop controller) and the
// update/rescale equations. Own choices: the rescale bit is the LSB dropped by
// the halving (the paper once calls it the most significant value, once the
// least significant bit; the standard's LSB is used), the initial accumulator
// is a configuration input, and the tail read-out port. q_count (queue
// occupancy) is only used by the assertion below.
module acss
  import hec_pkg::*;
#(
  parameter int NX_MAX = 680,
  parameter int NY_MAX = 512,
  parameter int NZ_MAX = 224
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic [$clog2(NX_MAX+1)-1:0] nx,
  input  logic [$clog2(NY_MAX+1)-1:0] ny,
  input  logic [$clog2(NZ_MAX+1)-1:0] nz,
  // mapped quantizer indices, BIP order
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [D_MAX-1:0] s_delta,
  // statistics
  output logic             m_valid,
  input  logic             m_ready,
  output stats_t           m_data,
  // final accumulators for the image tail
  output logic               tail_valid,
  input  logic               tail_ready,
  output logic [SIGMA_W-1:0] tail_sigma
);
  localparam int XW = $clog2(NX_MAX + 1);
  localparam int YW = $clog2(NY_MAX + 1);
  localparam int ZW = $clog2(NZ_MAX + 1);

  typedef struct packed {
    logic [SIGMA_W-1:0] sigma;
    logic [GAMMA_W-1:0] gamma;
  } fb_t;

  typedef struct packed {
    logic [D_MAX-1:0]   delta;
    logic [SIGMA_W-1:0] sigma;
    logic [GAMMA_W-1:0] gamma;
    logic               zero;
    logic               last;
  } op_t;

  // ---------------- input position counters ----------------
  logic [XW-1:0] x_q;
  logic [YW-1:0] y_q;
  logic [ZW-1:0] z_q;
  logic in_zero, in_last, in_hs;
  logic busy_q, tail_mode_q, tail_done;
  logic [ZW-1:0] tail_cnt_q;

  assign in_zero = (x_q == '0) && (y_q == '0);
  assign in_last = (x_q == nx - XW'(1)) && (y_q == ny - YW'(1)) && (z_q == nz - ZW'(1));
  assign in_hs   = s_valid && s_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_q <= '0; y_q <= '0; z_q <= '0;
    end else if (in_hs) begin
      if (z_q == nz - ZW'(1)) begin
        z_q <= '0;
        if (x_q == nx - XW'(1)) begin
          x_q <= '0;
          y_q <= (y_q == ny - YW'(1)) ? '0 : y_q + YW'(1);
        end else x_q <= x_q + XW'(1);
      end else z_q <= z_q + ZW'(1);
    end
  end

  // ---------------- loop controller ----------------
  logic ffw_in_valid, ffw_in_ready, ffw_in_prime;
  logic ffw_out_valid, ffw_out_ready;
  logic fb_in_valid, fb_in_ready, fb_out_valid, fb_out_ready, q_rd;
  fb_t  fb_head;

  loop_controller #(.LS_W(ZW)) u_lc (
    .clk, .rst_n,
    .loop_size(nz), .hold(busy_q), .restart(tail_done),
    .in_valid(s_valid), .in_ready(s_ready),
    .ffw_in_valid, .ffw_in_ready, .ffw_in_prime,
    .ffw_out_valid, .ffw_out_ready,
    .fb_in_valid, .fb_in_ready, .fb_out_valid, .fb_out_ready,
    .out_valid(m_valid), .out_ready(m_ready)
  );

  // ---------------- feed-forward stage 1: operands ----------------
  op_t op_d, op_q;
  logic op_valid, op_ready;

  always_comb begin
    op_d.delta = s_delta;
    op_d.zero  = in_zero;
    op_d.last  = in_last;
    if (ffw_in_prime) begin
      op_d.sigma = cfg.sigma_init;
      op_d.gamma = GAMMA_W'(1) << cfg.gamma0;
    end else begin
      op_d.sigma = fb_head.sigma;
      op_d.gamma = fb_head.gamma;
    end
  end

  elastic_buffer #(.T(op_t)) u_eb_op (
    .clk, .rst_n,
    .s_valid(ffw_in_valid), .s_ready(ffw_in_ready), .s_data(op_d),
    .m_valid(op_valid), .m_ready(op_ready), .m_data(op_q)
  );

  // ---------------- update ----------------
  stats_t upd;
  logic [SIGMA_W:0]   sum;
  logic [GAMMA_W-1:0] gmax;

  always_comb begin
    gmax = GAMMA_W'((GAMMA_W+1)'(1) << cfg.gamma_star) - GAMMA_W'(1);
    sum  = (SIGMA_W+1)'(op_q.sigma) + ((SIGMA_W+1)'(op_q.delta) << 2);
    upd.delta       = op_q.delta;
    upd.zero        = op_q.zero;
    upd.last        = op_q.last;
    upd.rescale     = 1'b0;
    upd.rescale_bit = 1'b0;
    if (op_q.zero) begin
      upd.sigma = op_q.sigma;
      upd.gamma = op_q.gamma;
    end else if (op_q.gamma == gmax) begin
      upd.sigma       = SIGMA_W'((sum + (SIGMA_W+1)'(1)) >> 1);
      upd.gamma       = GAMMA_W'(((GAMMA_W+1)'(op_q.gamma) + (GAMMA_W+1)'(1)) >> 1);
      upd.rescale     = 1'b1;
      upd.rescale_bit = sum[0];
    end else begin
      upd.sigma = SIGMA_W'(sum);
      upd.gamma = op_q.gamma + GAMMA_W'(1);
    end
  end

  // ---------------- feed-forward stage 2: result ----------------
  elastic_buffer #(.T(stats_t)) u_eb_res (
    .clk, .rst_n,
    .s_valid(op_valid), .s_ready(op_ready), .s_data(upd),
    .m_valid(ffw_out_valid), .m_ready(ffw_out_ready), .m_data(m_data)
  );

  // ---------------- feedback queue ----------------
  fb_t fb_wr;
  logic [$clog2(NZ_MAX+1)-1:0] q_count;
  assign fb_wr.sigma = m_data.sigma;
  assign fb_wr.gamma = m_data.gamma;
  assign q_rd        = tail_mode_q ? tail_ready : fb_out_ready;

  stream_fifo #(.T(fb_t), .DEPTH(NZ_MAX)) u_fb_q (
    .clk, .rst_n,
    .s_valid(fb_in_valid), .s_ready(fb_in_ready), .s_data(fb_wr),
    .m_valid(fb_out_valid), .m_ready(q_rd), .m_data(fb_head),
    .count(q_count)
  );

  // ---------------- image tail: drain the final accumulators ----------------
  assign tail_valid = tail_mode_q && fb_out_valid;
  assign tail_sigma = fb_head.sigma;
  assign tail_done  = tail_valid && tail_ready && (tail_cnt_q == nz - ZW'(1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      tail_mode_q <= 1'b0;
      tail_cnt_q  <= '0;
    end else begin
      if (in_hs && in_last) busy_q <= 1'b1;
      if (ffw_out_valid && ffw_out_ready && m_data.last) tail_mode_q <= 1'b1;
      if (tail_valid && tail_ready) tail_cnt_q <= tail_cnt_q + ZW'(1);
      if (tail_done) begin
        busy_q      <= 1'b0;
        tail_mode_q <= 1'b0;
        tail_cnt_q  <= '0;
      end
    end
  end
  // the feedback queue never holds more than one entry per band
  a_q_bound: assert property (@(posedge clk) disable iff (!rst_n) q_count <= nz);
endmodule
