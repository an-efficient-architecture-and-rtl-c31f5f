// hec_pkg: sizes, stream payload types, code constants and shared functions of
// the CCSDS-123.0-B-2 hybrid entropy coder.
//
// The build-time maxima (the g_*_max generics of the coder) live here because
// every payload struct depends on them: D_MAX = 16 bit samples, UMAX_MAX = 18,
// GAMMA0_MAX = 1 and GSTAR_MAX = 6 are the AVIRIS implementation settings, where
// each maximum equals the value actually used. The run-time values (D, Umax,
// gamma0, gamma*) arrive as configuration inputs and may be smaller.
//
// The low-entropy thresholds T_i and symbol limits L_i are the constants of the
// CCSDS-123.0-B-2 standard. The 16 code tables of the standard are not
// reproduced: the code-table ROM is filled by ct_standin_entry(), a small
// prefix-free stand-in laid out exactly as the trie/ROM scheme requires (see
// the function), so that the lookup mechanism runs with the real L_i. A table
// set generated from the standard in the same layout can replace it.
package hec_pkg;

  // ---------------- build-time maxima ----------------
  localparam int D_MAX       = 16;  // maximum dynamic range of delta (bits)
  localparam int UMAX_MAX    = 18;  // maximum unary length limit
  localparam int GAMMA0_MAX  = 1;   // maximum initial count exponent
  localparam int GSTAR_MAX   = 6;   // maximum rescaling counter size

  localparam int D_W      = $clog2(D_MAX + 1);
  localparam int UMAX_W   = $clog2(UMAX_MAX + 1);
  localparam int G0_W     = $clog2(GAMMA0_MAX + 1);
  localparam int GS_W     = $clog2(GSTAR_MAX + 1);
  localparam int SIGMA_W  = 2 + D_MAX + GSTAR_MAX;   // accumulator width
  localparam int GAMMA_W  = GSTAR_MAX;               // counter width
  localparam int K_W      = $clog2(D_MAX - 1);       // k in 0..D_MAX-2
  localparam int HI_CW_W  = D_MAX + UMAX_MAX;        // longest RLL-GPO2 codeword
  localparam int LEN_W    = 8;                       // codeword length field
  localparam int PKT_W    = 64;                      // packer word
  localparam int CW_W     = 64;                      // combiner -> packer codeword

  // ---------------- low-entropy codes ----------------
  localparam int NUM_CODES = 16;
  localparam int CI_W      = 4;                       // code index width
  localparam int SYM_W     = 4;                       // input symbol 0..L_i+1 (max 13)
  localparam int T_W       = 19;
  localparam int LE_CW_W   = 16;                      // low-entropy / flush codeword field
  localparam int LE_LEN_W  = 5;
  localparam int CT_PTR_W  = 8;
  localparam int CT_DEPTH  = 1 << CT_PTR_W;

  typedef logic [NUM_CODES-1:0][T_W-1:0]   t_table_t;
  typedef logic [NUM_CODES-1:0][SYM_W-1:0] l_table_t;

  // thresholds T_0..T_15 and input symbol limits L_0..L_15 (CCSDS-123.0-B-2)
  localparam t_table_t T_TAB = {
    19'd408,   19'd1112,  19'd1928,  19'd3195,  19'd5510,  19'd9282,  19'd14935, 19'd23331,
    19'd34898, 19'd50678, 19'd69670, 19'd95597, 19'd128672,19'd166979,19'd225404,19'd303336};
  localparam l_table_t L_TAB = {
    4'd0, 4'd2, 4'd2, 4'd2, 4'd2, 4'd2, 4'd2, 4'd2,
    4'd4, 4'd4, 4'd4, 4'd6, 4'd6, 4'd8, 4'd10, 4'd12};

  // ---------------- run-time configuration ----------------
  typedef struct packed {
    logic [D_W-1:0]     d;           // dynamic range D (4..D_MAX)
    logic [UMAX_W-1:0]  umax;        // unary length limit (8..UMAX_MAX)
    logic [G0_W-1:0]    gamma0;      // initial count exponent
    logic [GS_W-1:0]    gamma_star;  // rescaling counter size
    logic [SIGMA_W-1:0] sigma_init;  // initial accumulator value
  } cfg_t;

  // ---------------- stream payloads ----------------
  // ACSS output: one per sample
  typedef struct packed {
    logic [D_MAX-1:0]   delta;
    logic [SIGMA_W-1:0] sigma;
    logic [GAMMA_W-1:0] gamma;
    logic               zero;         // t = 0: sample is sent raw
    logic               rescale;      // counter rescaled on this sample
    logic               rescale_bit;  // LSB dropped by the rescale
    logic               last;         // last sample of the image
  } stats_t;

  // HiLo decision output
  typedef struct packed {
    stats_t s;
    logic   hilo;                     // 1: high-entropy code
  } dec_t;

  // flags travelling in the decision flags side-channel
  typedef struct packed {
    logic zero;
    logic hilo;
    logic rescale;
    logic rescale_bit;
    logic last;
  } flags_t;

  // variable-length codeword, right aligned, first bit sent = bit len-1
  typedef struct packed {
    logic [HI_CW_W-1:0] cw;
    logic [LEN_W-1:0]   len;
  } hi_code_t;

  // code-index selection output
  typedef struct packed {
    logic [D_MAX-1:0] delta;
    logic [CI_W-1:0]  idx;
    logic [SYM_W-1:0] lim;
    logic             active;         // low-entropy sample (hilo = 0 and t > 0)
    logic             last;
  } le_idx_t;

  // input-symbol calculation output
  typedef struct packed {
    le_idx_t          c;
    logic [SYM_W-1:0] iota;
  } le_sym_t;

  // low-entropy coder output: {escape RLL-GPO2, table codeword} or table codeword
  typedef struct packed {
    logic [HI_CW_W+LE_CW_W-1:0] cw;
    logic [LEN_W-1:0]           len;      // total length (0: nothing to send)
    logic [LEN_W-1:0]           esc_len;  // length of the leading escape part
  } le_code_t;

  typedef struct packed {
    logic [LE_CW_W-1:0]  cw;
    logic [LE_LEN_W-1:0] len;
  } flush_code_t;

  // codeword combiner -> VLC packer
  typedef struct packed {
    logic [CW_W-1:0]  cw;
    logic [LEN_W-1:0] len;
    logic             last;   // last codeword of the compressed image
  } code_t;

  typedef struct packed {
    logic [PKT_W-1:0] data;
    logic             last;
  } packet_t;

  // code-table ROM entry: (parent flush word, terminal codeword or child pointer)
  typedef struct packed {
    logic [LE_LEN_W-1:0] flush_len;
    logic [LE_CW_W-1:0]  flush_cw;
    logic                term;
    logic [LE_LEN_W-1:0] cw_len;
    logic [LE_CW_W-1:0]  cw;      // codeword, or child base pointer when !term
  } ct_entry_t;

  // ---------------- functions ----------------
  // Reverse length-limited GPO2 codeword R'_k(delta):
  //   u = delta >> k < umax : k LSBs of delta, a '1', then u '0's
  //   otherwise            : D-bit delta, then umax '0's
  function automatic hi_code_t rll_gpo2(input logic [D_MAX-1:0] delta,
                                        input logic [K_W-1:0]   k,
                                        input logic [UMAX_W-1:0] umax,
                                        input logic [D_W-1:0]   d);
    hi_code_t r;
    logic [D_MAX-1:0] u;
    logic [D_MAX-1:0] lsbs;
    u    = delta >> k;
    lsbs = delta & ((D_MAX'(1) << k) - D_MAX'(1));
    if (u < D_MAX'(umax)) begin
      r.cw  = (HI_CW_W'(lsbs) << (u[UMAX_W-1:0] + 1)) | (HI_CW_W'(1) << u[UMAX_W-1:0]);
      r.len = LEN_W'(k) + LEN_W'(u[UMAX_W-1:0]) + LEN_W'(1);
    end else begin
      r.cw  = HI_CW_W'(delta) << umax;
      r.len = LEN_W'(d) + LEN_W'(umax);
    end
    return r;
  endfunction

  // Stand-in code-table layout. Code i has the alphabet 0..L_i and the escape
  // symbol X = L_i + 1 (A = L_i + 2 symbols). Its tree has two levels: symbol 0
  // at the root leads to an inner node, every other root symbol and every symbol
  // after a 0 is a complete prefix. Each code occupies 2A ROM words from its root
  // pointer b: b+s are the root's children, b+A+s those of the inner node.
  // Codewords are fixed-length n = clog2(2A+1) bits: "0 s" -> s, root symbol
  // s >= 1 -> A-1+s, flush of the root -> 2A-1, flush of the inner node -> 2A.
  function automatic int ct_code_size(input int i);
    return 2 * (int'(L_TAB[i]) + 2);
  endfunction

  function automatic logic [CT_PTR_W-1:0] ct_root(input int i);
    int b;
    b = 0;
    for (int j = 0; j < NUM_CODES; j++) if (j < i) b += ct_code_size(j);
    return CT_PTR_W'(b);
  endfunction

  typedef logic [NUM_CODES-1:0][CT_PTR_W-1:0] root_table_t;

  function automatic root_table_t ct_root_table();
    root_table_t r;
    for (int i = 0; i < NUM_CODES; i++) r[i] = ct_root(i);
    return r;
  endfunction

  function automatic ct_entry_t ct_standin_entry(input int addr);
    ct_entry_t e;
    int b, a, n, s;
    e = '0;
    for (int i = 0; i < NUM_CODES; i++) begin
      b = int'(ct_root(i));
      a = int'(L_TAB[i]) + 2;
      n = $clog2(2 * a + 1);
      if (addr >= b && addr < b + 2 * a) begin
        s = (addr - b) % a;
        e.flush_len = LE_LEN_W'(n);
        e.cw_len    = LE_LEN_W'(n);
        if (addr < b + a) begin
          e.flush_cw = LE_CW_W'(2 * a - 1);
          if (s == 0) begin
            e.term = 1'b0;
            e.cw   = LE_CW_W'(b + a);
          end else begin
            e.term = 1'b1;
            e.cw   = LE_CW_W'(a - 1 + s);
          end
        end else begin
          e.flush_cw = LE_CW_W'(2 * a);
          e.term     = 1'b1;
          e.cw       = LE_CW_W'(s);
        end
      end
    end
    return e;
  endfunction

endpackage
