// le_code_index_select: Code Index Selection of the low-entropy coder.
//
// Selects the low-entropy code index i, the largest i in 0..15 with
//   Sigma_z(t) * 2^14 <= T_i * Gamma(t),
// and its input symbol limit L_i. The 16 products T_i * Gamma(t) are formed in
// parallel (one multiplier each) and compared with Sigma*2^14; since T_i
// decreases with i, the largest passing index is found with a priority scan.
// A sample that is high-entropy (hilo = 1) or the first of its band (t = 0) is
// marked inactive and gets i = 0. Pipelined like a DSP slice: registered
// operands, registered products, registered result (3 cycles, 1 sample/cycle).
//
// From the paper: 16 parallel multiplications, 3-stage DSP-style pipeline,
// outputs i and L_i. T_i and L_i are the standard's constants (hec_pkg). The
// inactive marking and i = 0 default are this implementation's.
module le_code_index_select
  import hec_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    s_valid,
  output logic    s_ready,
  input  dec_t    s_data,
  output logic    m_valid,
  input  logic    m_ready,
  output le_idx_t m_data
);
  localparam int P_W = T_W + GAMMA_W;

  typedef struct packed {
    dec_t                         d;
    logic [NUM_CODES-1:0][P_W-1:0] prod;
  } prod_t;

  dec_t    a_q;
  prod_t   p_d, p_q;
  le_idx_t c_d;
  logic    a_valid, a_ready, p_valid, p_ready;

  elastic_buffer #(.T(dec_t)) u_eb_in (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid(a_valid), .m_ready(a_ready), .m_data(a_q));

  always_comb begin
    p_d.d = a_q;
    for (int i = 0; i < NUM_CODES; i++)
      p_d.prod[i] = P_W'(T_TAB[i]) * P_W'(a_q.s.gamma);
  end

  elastic_buffer #(.T(prod_t)) u_eb_prod (
    .clk, .rst_n, .s_valid(a_valid), .s_ready(a_ready), .s_data(p_d),
    .m_valid(p_valid), .m_ready(p_ready), .m_data(p_q));

  logic [SIGMA_W+13:0] lhs;
  always_comb begin
    lhs       = (SIGMA_W+14)'(p_q.d.s.sigma) << 14;
    c_d.delta = p_q.d.s.delta;
    c_d.last  = p_q.d.s.last;
    c_d.active = !p_q.d.hilo && !p_q.d.s.zero;
    c_d.idx   = '0;
    for (int i = 1; i < NUM_CODES; i++)
      if (lhs <= (SIGMA_W+14)'(p_q.prod[i])) c_d.idx = CI_W'(i);
    c_d.lim = L_TAB[c_d.idx];
  end

  elastic_buffer #(.T(le_idx_t)) u_eb_out (
    .clk, .rst_n, .s_valid(p_valid), .s_ready(p_ready), .s_data(c_d),
    .m_valid, .m_ready, .m_data);
endmodule
