// hiec: High Entropy Coder unit.
//
// Encodes every sample with the reverse length-limited GPO2 code R'_k(delta)
// and outputs codeword and length; the codeword combiner decides later whether
// it is used. Two sub-pipelines:
//   k calculation (3 stages): 49*Gamma | >>5 | + Sigma, then the comparison
//     k = largest k <= max(D-2, 2) with 4*Gamma*2^k <= Sigma + floor(49*Gamma/2^5)
//     (k = 0 when even k = 0 fails);
//   RLL-GPO2 encoding (2 stages): register delta, k and delta>>k, then register
//     the codeword; at t = 0 (zero flag) the output is the raw D-bit delta.
// Latency 5 cycles, 1 sample (codeword, length) per cycle. The length field is
// 8 bits; the codeword is at most D + Umax bits.
//
// From the paper: the 3 + 2 stage split, 8-bit length, raw output at t = 0 and
// the RLL-GPO2 definition. The comparison uses 4*Gamma*2^k as drawn in the
// unit's schematic and required by the standard; the printed inequality omits
// the factor 4. The k-bit field is taken as the k least significant bits of
// delta as the text says. The three lowest bits of the statistics word (flags
// used elsewhere) are not read here.
module hiec
  import hec_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [D_W-1:0]    d,
  input  logic [UMAX_W-1:0] umax,
  input  logic              s_valid,
  output logic              s_ready,
  input  stats_t            s_data,
  output logic              m_valid,
  input  logic              m_ready,
  output hi_code_t          m_data
);
  localparam int G49_W = GAMMA_W + 6;
  localparam int ACC_W = SIGMA_W + 1;
  localparam int CMP_W = ACC_W + 1;

  typedef struct packed {
    logic [D_MAX-1:0]   delta;
    logic [SIGMA_W-1:0] sigma;
    logic [GAMMA_W-1:0] gamma;
    logic [G49_W-1:0]   g49;     // 49*Gamma, then floor(49*Gamma/32)
    logic               zero;
  } kc_t;

  typedef struct packed {
    logic [D_MAX-1:0]   delta;
    logic [ACC_W-1:0]   rhs;     // Sigma + floor(49*Gamma/32)
    logic [GAMMA_W-1:0] gamma;
    logic               zero;
  } ks_t;

  typedef struct packed {
    logic [D_MAX-1:0] delta;
    logic [K_W-1:0]   k;
    logic             zero;
  } e1_t;

  typedef struct packed {
    hi_code_t         code;
    logic [D_MAX-1:0] delta;
    logic             zero;
  } e2_t;

  kc_t s1_d, s1_q, s2_d, s2_q;
  ks_t s3_d, s3_q;
  e1_t e1_d, e1_q;
  e2_t e2_d, e2_q;
  logic v1, r1, v2, r2, v3, r3, v4, r4;

  // ---- k calculation ----
  always_comb begin
    s1_d       = '0;
    s1_d.delta = s_data.delta;
    s1_d.sigma = s_data.sigma;
    s1_d.gamma = s_data.gamma;
    s1_d.zero  = s_data.zero;
    s1_d.g49   = G49_W'(s_data.gamma) * G49_W'(49);
  end
  elastic_buffer #(.T(kc_t)) u_eb1 (.clk, .rst_n, .s_valid, .s_ready, .s_data(s1_d),
                                    .m_valid(v1), .m_ready(r1), .m_data(s1_q));
  always_comb begin
    s2_d     = s1_q;
    s2_d.g49 = s1_q.g49 >> 5;
  end
  elastic_buffer #(.T(kc_t)) u_eb2 (.clk, .rst_n, .s_valid(v1), .s_ready(r1), .s_data(s2_d),
                                    .m_valid(v2), .m_ready(r2), .m_data(s2_q));
  always_comb begin
    s3_d.delta = s2_q.delta;
    s3_d.gamma = s2_q.gamma;
    s3_d.zero  = s2_q.zero;
    s3_d.rhs   = ACC_W'(s2_q.sigma) + ACC_W'(s2_q.g49);
  end
  elastic_buffer #(.T(ks_t)) u_eb3 (.clk, .rst_n, .s_valid(v2), .s_ready(r2), .s_data(s3_d),
                                    .m_valid(v3), .m_ready(r3), .m_data(s3_q));

  // comparisons 4*Gamma << k against the right-hand side, one per k
  logic [K_W-1:0] kmax, k_sel;
  always_comb begin
    kmax  = (d > D_W'(4)) ? K_W'(d - D_W'(2)) : K_W'(2);
    k_sel = '0;
    for (int k = 1; k <= D_MAX - 2; k++) begin
      if (K_W'(k) <= kmax &&
          ((CMP_W'(s3_q.gamma) << (k + 2)) <= CMP_W'(s3_q.rhs)))
        k_sel = K_W'(k);
    end
  end

  // ---- RLL-GPO2 encoding ----
  always_comb begin
    e1_d.delta = s3_q.delta;
    e1_d.zero  = s3_q.zero;
    e1_d.k     = k_sel;
  end
  elastic_buffer #(.T(e1_t)) u_eb4 (.clk, .rst_n, .s_valid(v3), .s_ready(r3), .s_data(e1_d),
                                    .m_valid(v4), .m_ready(r4), .m_data(e1_q));

  hi_code_t gpo2;
  rll_gpo2_encoder u_enc (.delta(e1_q.delta), .k(e1_q.k), .umax, .d, .code(gpo2));

  assign e2_d.code  = gpo2;
  assign e2_d.delta = e1_q.delta;
  assign e2_d.zero  = e1_q.zero;

  elastic_buffer #(.T(e2_t)) u_eb5 (.clk, .rst_n, .s_valid(v4), .s_ready(r4), .s_data(e2_d),
                                    .m_valid, .m_ready, .m_data(e2_q));

  // output multiplexer: the first sample of each band is sent raw
  always_comb begin
    if (e2_q.zero) begin
      m_data.cw  = HI_CW_W'(e2_q.delta);
      m_data.len = LEN_W'(d);
    end else begin
      m_data = e2_q.code;
    end
  end
endmodule
