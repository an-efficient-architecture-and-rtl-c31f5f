// codeword_combiner: chooses, per sample, what goes into the bitstream and
// sequences the compressed image tail.
//
// Inputs are three aligned per-sample streams (decision flags from the
// side-channel, the high-entropy codeword, the low-entropy coder output) and,
// for the tail, the flush-codeword stream of the low-entropy coder and the
// final-accumulator stream of the ACSS unit. Per sample:
//   t = 0            : the raw D-bit delta (from the high-entropy coder)
//   hilo = 1         : the RLL-GPO2 codeword
//   hilo = 0         : the low-entropy output, if any; an escape gives two
//                      beats: first R'_0(delta-L_i-1), next cycle the table
//                      codeword (one extra cycle per escape symbol)
//   counter rescaled : the rescale bit is placed in front of the sample's
//                      first codeword (alone if the sample emits nothing else)
// A sample that only extends a low-entropy prefix sends nothing. After the
// sample flagged last, the 16 flush codewords (code 0 first) and then the Nz
// final accumulators (band 0 first, 2 + D + gamma* bits each) are sent; the
// final accumulator carries the `last` mark for the packer.
// Output: one codeword of up to 64 bits per cycle through an elastic buffer.
//
// From the paper: what is selected per sample, the escape taking two
// codewords and one extra cycle, the rescale bit preceding the codeword, and
// the tail order (16 flush codewords, then Nz accumulators). Own choices: the
// state machine, merging the rescale bit into the first codeword rather than
// sending it as a separate beat, dropping empty codewords, and the tail word
// width 2 + D + gamma* (taken from the standard). Only cfg.d and
// cfg.gamma_star are read, hence the unused-bits lint note on cfg.
module codeword_combiner
  import hec_pkg::*;
#(
  parameter int NZ_MAX = 224
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic [$clog2(NZ_MAX+1)-1:0] nz,
  input  logic        flags_valid,
  output logic        flags_ready,
  input  flags_t      flags,
  input  logic        hi_valid,
  output logic        hi_ready,
  input  hi_code_t    hi_code,
  input  logic        le_valid,
  output logic        le_ready,
  input  le_code_t    le_code,
  input  logic        flush_valid,
  output logic        flush_ready,
  input  flush_code_t flush_code,
  input  logic        tail_valid,
  output logic        tail_ready,
  input  logic [SIGMA_W-1:0] tail_sigma,
  output logic        m_valid,
  input  logic        m_ready,
  output code_t       m_data
);
  localparam int ZW  = $clog2(NZ_MAX + 1);
  localparam int LCW = HI_CW_W + LE_CW_W;
  localparam int CNT_W = (ZW > CI_W) ? ZW : CI_W;

  typedef enum logic [1:0] {S_SAMPLE, S_ESC2, S_FLUSH, S_TAIL} state_t;

  state_t      state_q;
  logic [CNT_W-1:0] cnt_q;
  code_t       o_d;
  logic        o_valid, o_ready, all_valid, consume;
  logic [LEN_W-1:0] tab_len, first_len;
  logic [CW_W-1:0]  first_cw;

  assign all_valid = flags_valid && hi_valid && le_valid;
  assign tab_len   = le_code.len - le_code.esc_len;

  // first (or only) codeword of a sample, before the rescale bit is added
  always_comb begin
    if (flags.zero || flags.hilo) begin
      first_cw  = CW_W'(hi_code.cw);
      first_len = hi_code.len;
    end else if (le_code.esc_len != '0) begin
      first_cw  = CW_W'(le_code.cw >> tab_len);
      first_len = le_code.esc_len;
    end else begin
      first_cw  = CW_W'(le_code.cw);
      first_len = le_code.len;
    end
  end

  always_comb begin
    o_d     = '0;
    o_valid = 1'b0;
    consume = 1'b0;
    unique case (state_q)
      S_SAMPLE: begin
        o_d.cw  = first_cw;
        o_d.len = first_len;
        if (flags.rescale) begin
          // clear anything above the codeword before placing the bit
          o_d.cw  = (first_cw & ((CW_W'(1) << first_len) - CW_W'(1))) |
                    (CW_W'(flags.rescale_bit) << first_len);
          o_d.len = first_len + LEN_W'(1);
        end
        o_valid = all_valid && (o_d.len != '0);
        consume = all_valid && (o_ready || o_d.len == '0) &&
                  !(!flags.zero && !flags.hilo && le_code.esc_len != '0);
      end
      S_ESC2: begin
        o_d.cw  = CW_W'(le_code.cw & LCW'((LCW'(1) << tab_len) - LCW'(1)));
        o_d.len = tab_len;
        o_valid = 1'b1;
        consume = o_ready;
      end
      S_FLUSH: begin
        o_d.cw  = CW_W'(flush_code.cw);
        o_d.len = LEN_W'(flush_code.len);
        o_valid = flush_valid && (o_d.len != '0);
      end
      S_TAIL: begin
        o_d.cw   = CW_W'(tail_sigma);
        o_d.len  = LEN_W'(2) + LEN_W'(cfg.d) + LEN_W'(cfg.gamma_star);
        o_d.last = (cnt_q == CNT_W'(nz) - CNT_W'(1));
        o_valid  = tail_valid;
      end
      default: ;
    endcase
  end

  assign flags_ready = consume;
  assign hi_ready    = consume;
  assign le_ready    = consume;
  assign flush_ready = (state_q == S_FLUSH) && flush_valid && (o_ready || o_d.len == '0);
  assign tail_ready  = (state_q == S_TAIL) && o_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_SAMPLE;
      cnt_q   <= '0;
    end else begin
      unique case (state_q)
        S_SAMPLE: begin
          if (all_valid && !flags.zero && !flags.hilo && le_code.esc_len != '0 && o_ready)
            state_q <= S_ESC2;
          else if (consume && flags.last)
            state_q <= S_FLUSH;
        end
        S_ESC2:
          if (consume) state_q <= flags.last ? S_FLUSH : S_SAMPLE;
        S_FLUSH:
          if (flush_valid && flush_ready) begin
            cnt_q <= cnt_q + CNT_W'(1);
            if (cnt_q == CNT_W'(NUM_CODES - 1)) begin
              cnt_q   <= '0;
              state_q <= S_TAIL;
            end
          end
        S_TAIL:
          if (tail_valid && tail_ready) begin
            cnt_q <= cnt_q + CNT_W'(1);
            if (cnt_q == CNT_W'(nz) - CNT_W'(1)) begin
              cnt_q   <= '0;
              state_q <= S_SAMPLE;
            end
          end
        default: ;
      endcase
    end
  end

  elastic_buffer #(.T(code_t)) u_eb_out (
    .clk, .rst_n, .s_valid(o_valid), .s_ready(o_ready), .s_data(o_d),
    .m_valid, .m_ready, .m_data);
endmodule
