// rll_gpo2_encoder: reverse length-limited Golomb power-of-2 codeword R'_k.
//
// Combinational. For code index k and unary limit Umax:
//   u = floor(delta / 2^k) < Umax : the k LSBs of delta, a '1', then u '0's
//                                   (length k + 1 + u)
//   otherwise                     : the D-bit delta, then Umax '0's
//                                   (length D + Umax)
// The codeword is right aligned in cw; its first bit to be sent is bit len-1.
// Used by the high-entropy coder (k from the statistics) and by the
// low-entropy coder's escape path (k = 0, value delta - L_i - 1).
//
// The code definition is the paper's (and the standard's); the right-aligned
// codeword/length representation is this implementation's.
module rll_gpo2_encoder
  import hec_pkg::*;
(
  input  logic [D_MAX-1:0]  delta,
  input  logic [K_W-1:0]    k,
  input  logic [UMAX_W-1:0] umax,
  input  logic [D_W-1:0]    d,
  output hi_code_t          code
);
  assign code = rll_gpo2(delta, k, umax, d);
endmodule
