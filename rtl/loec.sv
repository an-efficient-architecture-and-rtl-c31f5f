// loec: Low Entropy Coder unit.
//
// Chain of three sub-units: code index selection (i and L_i from the
// statistics, 3 cycles), input symbol calculation (iota, 1 cycle) and the
// code-table lookup (table codeword with optional escape RLL-GPO2 prefix,
// 1 cycle). One output per input sample, 5 cycles latency, 1 sample/cycle.
// After the last sample of an image the 16 flush codewords leave on the
// flush port in code-index order.
//
// The three sub-units and their order follow the paper's diagram; the
// elastic handshakes between them and the flush port are this design's.
module loec
  import hec_pkg::*;
#(
  parameter string       CT_INIT_FILE = "",
  parameter root_table_t ROOT         = ct_root_table()
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [D_W-1:0]    d,
  input  logic [UMAX_W-1:0] umax,
  input  logic              s_valid,
  output logic              s_ready,
  input  dec_t              s_data,
  output logic              m_valid,
  input  logic              m_ready,
  output le_code_t          m_data,
  output logic              flush_valid,
  input  logic              flush_ready,
  output flush_code_t       flush_data
);
  le_idx_t idx;
  le_sym_t sym;
  logic    iv, ir, sv, sr;

  le_code_index_select u_cis (
    .clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid(iv), .m_ready(ir), .m_data(idx));

  le_input_symbol u_isc (
    .clk, .rst_n, .s_valid(iv), .s_ready(ir), .s_data(idx),
    .m_valid(sv), .m_ready(sr), .m_data(sym));

  le_ct_lookup #(.CT_INIT_FILE(CT_INIT_FILE), .ROOT(ROOT)) u_ctl (
    .clk, .rst_n, .d, .umax, .s_valid(sv), .s_ready(sr), .s_data(sym),
    .m_valid, .m_ready, .m_data, .flush_valid, .flush_ready, .flush_data);
endmodule
