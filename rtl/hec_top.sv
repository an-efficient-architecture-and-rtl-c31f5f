// hec_top: CCSDS-123.0-B-2 Hybrid Entropy Coder, BIP sample order.
//
// Takes the predictor's mapped quantizer indices delta_z(t), one per cycle in
// BIP order (all bands of a pixel, then the next pixel), and produces the
// hybrid-coded bitstream as 64-bit words, one input sample per cycle
// sustained. Each sample is coded either with a reverse length-limited GPO2
// code (high entropy) or fed to one of 16 low-entropy variable-to-variable
// codes, chosen per sample from running statistics; after the last sample the
// image tail (16 flush codewords, then the Nz final accumulators) is appended.
//
// Pipeline, all stages joined by valid/ready elastic buffers:
//   acss (2) -> hilo_decision (3) -> fork -> hiec (5)             -> combiner -> vlc_packer
//                                        -> loec (5)  [flush port] ->
//                                        -> decision-flags side-channel FIFO ->
//   acss tail port (final accumulators)                            ->
// Throughput is 1 sample/cycle except one extra cycle per escape symbol and
// the 16 + Nz tail cycles. Latency from input to the combiner is about 11
// cycles.
//
// Interfaces: AXI4-Stream-like input (s_valid/s_ready/s_delta) and output
// (m_valid/m_ready/m_data/m_last). The run-time configuration (cfg, nx, ny,
// nz) is plain ports and must be stable while an image is being coded; the
// memory-mapped register interface that would hold it, and the compressed
// image header, are outside this block. A new image may start as soon as the
// previous one has entered; its first sample is held until the previous tail
// has been read out of the ACSS unit.
//
// From the paper: the six units, their order and the decision-flags
// side-channel of the top-level diagram, AXI4-Stream-style handshakes and the
// 1 sample/cycle target. Own choices: the 3-way fork, the side-channel depth
// (SIDE_DEPTH), and plain configuration ports. The side-channel occupancy
// output (side_count) is left unused.
module hec_top
  import hec_pkg::*;
#(
  parameter int NX_MAX = 680,   // g_Nx_max
  parameter int NY_MAX = 512,   // g_Ny_max
  parameter int NZ_MAX = 224,   // g_Nz_max
  parameter int SIDE_DEPTH = 8  // decision-flags side-channel depth
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic [$clog2(NX_MAX+1)-1:0] nx,
  input  logic [$clog2(NY_MAX+1)-1:0] ny,
  input  logic [$clog2(NZ_MAX+1)-1:0] nz,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [D_MAX-1:0] s_delta,
  output logic             m_valid,
  input  logic             m_ready,
  output logic [PKT_W-1:0] m_data,
  output logic             m_last
);
  stats_t      st;
  dec_t        dec;
  flags_t      fl_in, fl_out;
  hi_code_t    hi;
  le_code_t    le;
  flush_code_t fc;
  code_t       cw;
  packet_t     pk;
  logic [SIGMA_W-1:0] tail_sigma;
  logic st_v, st_r, dec_v, dec_r, hi_v, hi_r, le_v, le_r, fl_v, fl_r;
  logic fc_v, fc_r, tl_v, tl_r, cw_v, cw_r;
  logic [2:0] fk_v, fk_r;
  logic [$clog2(SIDE_DEPTH+1)-1:0] side_count;

  acss #(.NX_MAX(NX_MAX), .NY_MAX(NY_MAX), .NZ_MAX(NZ_MAX)) u_acss (
    .clk, .rst_n, .cfg, .nx, .ny, .nz,
    .s_valid, .s_ready, .s_delta,
    .m_valid(st_v), .m_ready(st_r), .m_data(st),
    .tail_valid(tl_v), .tail_ready(tl_r), .tail_sigma);

  hilo_decision u_hilo (
    .clk, .rst_n, .s_valid(st_v), .s_ready(st_r), .s_data(st),
    .m_valid(dec_v), .m_ready(dec_r), .m_data(dec));

  stream_fork #(.N(3)) u_fork (
    .clk, .rst_n, .s_valid(dec_v), .s_ready(dec_r), .m_valid(fk_v), .m_ready(fk_r));

  hiec u_hiec (
    .clk, .rst_n, .d(cfg.d), .umax(cfg.umax),
    .s_valid(fk_v[0]), .s_ready(fk_r[0]), .s_data(dec.s),
    .m_valid(hi_v), .m_ready(hi_r), .m_data(hi));

  loec u_loec (
    .clk, .rst_n, .d(cfg.d), .umax(cfg.umax),
    .s_valid(fk_v[1]), .s_ready(fk_r[1]), .s_data(dec),
    .m_valid(le_v), .m_ready(le_r), .m_data(le),
    .flush_valid(fc_v), .flush_ready(fc_r), .flush_data(fc));

  // decision flags side-channel
  assign fl_in.zero        = dec.s.zero;
  assign fl_in.hilo        = dec.hilo;
  assign fl_in.rescale     = dec.s.rescale;
  assign fl_in.rescale_bit = dec.s.rescale_bit;
  assign fl_in.last        = dec.s.last;

  stream_fifo #(.T(flags_t), .DEPTH(SIDE_DEPTH)) u_side (
    .clk, .rst_n, .s_valid(fk_v[2]), .s_ready(fk_r[2]), .s_data(fl_in),
    .m_valid(fl_v), .m_ready(fl_r), .m_data(fl_out), .count(side_count));

  codeword_combiner #(.NZ_MAX(NZ_MAX)) u_comb (
    .clk, .rst_n, .cfg, .nz,
    .flags_valid(fl_v), .flags_ready(fl_r), .flags(fl_out),
    .hi_valid(hi_v), .hi_ready(hi_r), .hi_code(hi),
    .le_valid(le_v), .le_ready(le_r), .le_code(le),
    .flush_valid(fc_v), .flush_ready(fc_r), .flush_code(fc),
    .tail_valid(tl_v), .tail_ready(tl_r), .tail_sigma,
    .m_valid(cw_v), .m_ready(cw_r), .m_data(cw));

  vlc_packer u_pack (
    .clk, .rst_n, .s_valid(cw_v), .s_ready(cw_r), .s_data(cw),
    .m_valid, .m_ready, .m_data(pk));

  assign m_data = pk.data;
  assign m_last = pk.last;
endmodule
