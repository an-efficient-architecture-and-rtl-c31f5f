// le_input_symbol: Input Symbol Calculation of the low-entropy coder.
//
// iota = delta when delta <= L_i, otherwise the escape symbol X, represented
// as L_i + 1. One elastic register stage (1 cycle, 1 sample/cycle).
//
// Follows the paper's input-symbol rule directly; the single register stage
// is this implementation's choice.
module le_input_symbol
  import hec_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    s_valid,
  output logic    s_ready,
  input  le_idx_t s_data,
  output logic    m_valid,
  input  logic    m_ready,
  output le_sym_t m_data
);
  le_sym_t d;
  always_comb begin
    d.c    = s_data;
    d.iota = (s_data.delta <= D_MAX'(s_data.lim)) ? SYM_W'(s_data.delta)
                                                   : s_data.lim + SYM_W'(1);
  end

  elastic_buffer #(.T(le_sym_t)) u_eb (
    .clk, .rst_n, .s_valid, .s_ready, .s_data(d), .m_valid, .m_ready, .m_data);
endmodule
