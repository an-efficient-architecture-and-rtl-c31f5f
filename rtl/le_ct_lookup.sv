// le_ct_lookup: Low-Entropy Code-Table Lookup with its address update loop.
//
// CT address lookup: 16 registers, one per code index, hold the ROM pointer of
// the prefix each code has accumulated so far (its root pointer when empty).
// For an active (low-entropy) sample with code index i and input symbol iota:
//   addr = ct_addr[i] + iota;  word = CT_ROM[addr]
//   terminal word : the table codeword is emitted, ct_addr[i] <- root(i)
//   inner word    : nothing from the table, ct_addr[i] <- child pointer
// Read, add, ROM read and write-back happen in one cycle, so consecutive
// samples of the same code need no stall (1 sample/cycle).
// Escape path in parallel: when iota is the escape symbol L_i + 1 the
// RLL-GPO2 codeword R'_0(delta - L_i - 1) is produced and placed in front of
// the table codeword (an escape always completes the prefix). Inactive samples
// (high-entropy or t = 0) pass with an empty codeword so the output stays
// aligned with the other coders.
// Image tail: after the sample marked last, the flush word of each code
// i = 0..15 is read at ROM[ct_addr[i]] and sent on the flush port, and each
// pointer returns to its root.
// Output is registered (1 cycle). The ROM contents and root pointers are
// parameters; the defaults are the stand-in tables of hec_pkg.
//
// From the paper: the CT_ADDRESS_LOOKUP registers, the one-cycle
// add/read/write-back loop, reset to the root on a terminal word, the escape
// RLL-GPO2 path concatenated before the table codeword, and flush-word
// extraction at the image end. Own choices: word and field widths, the flush
// port, and the handling of inactive samples. With the default stand-in
// tables some ROM word bits are constant, so synthesis sees part of the
// output codeword field as constant zero.
module le_ct_lookup
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
  input  le_sym_t           s_data,
  output logic              m_valid,
  input  logic              m_ready,
  output le_code_t          m_data,
  output logic              flush_valid,
  input  logic              flush_ready,
  output flush_code_t       flush_data
);
  logic [NUM_CODES-1:0][CT_PTR_W-1:0] ct_addr_q;
  logic                flushing_q;
  logic [CI_W-1:0]     fidx_q;
  logic [CT_PTR_W-1:0] rom_addr;
  ct_entry_t           word;
  logic                eb_ready, in_hs, escape, match;
  hi_code_t            esc;
  le_code_t            out_d;
  logic [LEN_W-1:0]    tab_len;
  logic [LE_CW_W-1:0]  tab_cw;

  assign s_ready = eb_ready && !flushing_q;
  assign in_hs   = s_valid && s_ready;

  // offset calculation and ROM read
  assign rom_addr = flushing_q ? ct_addr_q[fidx_q]
                               : ct_addr_q[s_data.c.idx] + CT_PTR_W'(s_data.iota);

  le_ct_rom #(.INIT_FILE(CT_INIT_FILE)) u_rom (.addr(rom_addr), .data(word));

  // escape path: R'_0(delta - L_i - 1)
  assign escape = s_data.c.active && (s_data.iota == s_data.c.lim + SYM_W'(1));
  rll_gpo2_encoder u_esc (
    .delta(s_data.c.delta - D_MAX'(s_data.c.lim) - D_MAX'(1)),
    .k('0), .umax, .d, .code(esc));

  assign match = s_data.c.active && word.term;

  always_comb begin
    tab_len       = match ? LEN_W'(word.cw_len) : '0;
    tab_cw        = match ? word.cw : '0;
    out_d.esc_len = escape ? esc.len : '0;
    out_d.len     = out_d.esc_len + tab_len;
    out_d.cw      = (HI_CW_W+LE_CW_W)'(tab_cw);
    if (escape) out_d.cw = out_d.cw | ((HI_CW_W+LE_CW_W)'(esc.cw) << tab_len);
  end

  elastic_buffer #(.T(le_code_t)) u_eb_out (
    .clk, .rst_n, .s_valid(in_hs), .s_ready(eb_ready), .s_data(out_d),
    .m_valid, .m_ready, .m_data);

  // flush port
  assign flush_valid     = flushing_q;
  assign flush_data.cw   = word.flush_cw;
  assign flush_data.len  = word.flush_len;

  // CT address update loop
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ct_addr_q  <= ROOT;
      flushing_q <= 1'b0;
      fidx_q     <= '0;
    end else if (flushing_q) begin
      if (flush_ready) begin
        ct_addr_q[fidx_q] <= ROOT[fidx_q];
        fidx_q            <= fidx_q + CI_W'(1);
        if (fidx_q == CI_W'(NUM_CODES - 1)) flushing_q <= 1'b0;
      end
    end else if (in_hs) begin
      if (s_data.c.active)
        ct_addr_q[s_data.c.idx] <= word.term ? ROOT[s_data.c.idx]
                                             : CT_PTR_W'(word.cw);
      if (s_data.c.last) flushing_q <= 1'b1;
    end
  end

  // an escape symbol always ends at a terminal node
  a_esc_match: assert property (@(posedge clk) disable iff (!rst_n)
                                in_hs && escape |-> word.term);
endmodule
