// vlc_packer: Variable Length Code packer.
//
// Accepts one codeword per cycle (right-aligned value, length 0..64, first
// bit = bit len-1) and appends it MSB-first to a bit accumulator; every time
// 64 bits are complete a 64-bit word is output, its bit 63 being the earliest
// bit. The codeword flagged `last` closes the stream: the remaining bits, if
// any, are sent in one more word padded with zeros, and the final word carries
// `last`.
// Accumulator: 128 bits, left aligned, fill < 64 between codewords, so a
// codeword of up to 64 bits never overflows it. Input is accepted whenever the
// output register is free or being read (1 codeword/cycle at full rate);
// closing a stream may take one extra cycle.
//
// The paper only states that 64-bit packets are produced and reuses an
// earlier packer; this accumulator design, MSB-first order and zero padding
// of the final word are this implementation's choices.
module vlc_packer
  import hec_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    s_valid,
  output logic    s_ready,
  input  code_t   s_data,
  output logic    m_valid,
  input  logic    m_ready,
  output packet_t m_data
);
  logic [2*PKT_W-1:0] acc_q, acc_ins, acc_new;
  logic [6:0]         fill_q;
  logic [7:0]         fill_new;
  logic               pend_q, out_free, in_hs;

  assign out_free = !m_valid || m_ready;
  assign s_ready  = out_free && !pend_q;
  assign in_hs    = s_valid && s_ready;

  logic [CW_W-1:0] cw_m;
  always_comb begin
    // keep only the len valid bits, then place them right after the bits held
    cw_m     = (s_data.len >= LEN_W'(CW_W)) ? s_data.cw
             : s_data.cw & ((CW_W'(1) << s_data.len) - CW_W'(1));
    acc_ins  = (2*PKT_W)'(cw_m) << (8'(2*PKT_W) - 8'(fill_q) - s_data.len);
    acc_new  = acc_q | acc_ins;
    fill_new = 8'(fill_q) + s_data.len;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_q   <= '0;
      fill_q  <= '0;
      pend_q  <= 1'b0;
      m_valid <= 1'b0;
      m_data  <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (pend_q && out_free) begin
        // close the stream with the zero-padded remainder
        m_valid     <= 1'b1;
        m_data.data <= acc_q[2*PKT_W-1 -: PKT_W];
        m_data.last <= 1'b1;
        acc_q       <= '0;
        fill_q      <= '0;
        pend_q      <= 1'b0;
      end else if (in_hs) begin
        if (fill_new >= 8'(PKT_W)) begin
          m_valid     <= 1'b1;
          m_data.data <= acc_new[2*PKT_W-1 -: PKT_W];
          m_data.last <= s_data.last && (fill_new == 8'(PKT_W));
          acc_q       <= acc_new << PKT_W;
          fill_q      <= 7'(fill_new - 8'(PKT_W));
          pend_q      <= s_data.last && (fill_new != 8'(PKT_W));
        end else begin
          acc_q  <= acc_new;
          fill_q <= 7'(fill_new);
          pend_q <= s_data.last && (fill_new != '0);
        end
      end
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          s_valid |-> s_data.len <= LEN_W'(PKT_W));
endmodule
