// hilo_decision: High/Low entropy decision unit.
//
// Decides per sample whether the high-entropy (RLL-GPO2) or a low-entropy code
// is used, comparing the mean statistic with the largest low-entropy
// threshold T_0:
//   hilo = 1 (high entropy)  when  Sigma_z(t) * 2^14 >  T_0 * Gamma(t)
//   hilo = 0 (low entropy)   when  Sigma_z(t) * 2^14 <= T_0 * Gamma(t)
// T_0 is not a power of two, so the product is a real multiplication; it is
// laid out like a DSP slice with registered operands, a registered product and
// a registered comparison (3 elastic stages, 3 cycles latency, 1 sample/cycle).
// The low-entropy side uses the same "<=" relation as the code index
// selection, so every low-entropy sample has a valid code index.
//
// The paper's equation for this flag prints the inequality the other way
// round (hilo = 1 when Sigma*2^14 <= T_0*Gamma), which contradicts its own
// code-index rule; the orientation above follows the code-index rule and the
// standard. The register layout mirrors the DSP-slice mapping the paper
// describes; no vendor primitive is instantiated.
module hilo_decision
  import hec_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   s_valid,
  output logic   s_ready,
  input  stats_t s_data,
  output logic   m_valid,
  input  logic   m_ready,
  output dec_t   m_data
);
  localparam int P_W = T_W + GAMMA_W;

  typedef struct packed {
    stats_t         s;
    logic [P_W-1:0] prod;
  } prod_t;

  stats_t a_q;
  prod_t  p_d, p_q;
  dec_t   c_d;
  logic   a_valid, a_ready, p_valid, p_ready;

  elastic_buffer #(.T(stats_t)) u_eb_in (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid(a_valid), .m_ready(a_ready), .m_data(a_q));

  assign p_d.s    = a_q;
  assign p_d.prod = P_W'(T_TAB[0]) * P_W'(a_q.gamma);

  elastic_buffer #(.T(prod_t)) u_eb_prod (
    .clk, .rst_n, .s_valid(a_valid), .s_ready(a_ready), .s_data(p_d),
    .m_valid(p_valid), .m_ready(p_ready), .m_data(p_q));

  assign c_d.s    = p_q.s;
  assign c_d.hilo = ((SIGMA_W+14)'(p_q.s.sigma) << 14) > (SIGMA_W+14)'(p_q.prod);

  elastic_buffer #(.T(dec_t)) u_eb_cmp (
    .clk, .rst_n, .s_valid(p_valid), .s_ready(p_ready), .s_data(c_d),
    .m_valid, .m_ready, .m_data);
endmodule
