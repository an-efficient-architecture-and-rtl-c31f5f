// hec_ref_pkg: bit-exact software model of the hybrid entropy coder used by
// the testbenches as the independent reference.
//
// It follows the algorithm directly (per-band accumulators, counter update and
// rescale, high/low decision, code index, escape, prefix walk on the code
// trees, image tail) without any of the hardware's pipelining, ROM layout or
// pointer arithmetic: the low-entropy codes are modelled as prefix strings,
// using the same stand-in code definition as the RTL (two-level trees, fixed
// n = clog2(2A+1)-bit codewords, A = L_i + 2). The produced bits are packed
// MSB-first into 64-bit words, the last one zero padded.
// The coding rules are those of the paper and the standard; the stand-in
// code tables and the word packing mirror this implementation's own choices.
package hec_ref_pkg;

  localparam int T_REF [16] = '{303336, 225404, 166979, 128672, 95597, 69670, 50678, 34898,
                                23331, 14935, 9282, 5510, 3195, 1928, 1112, 408};
  localparam int L_REF [16] = '{12, 10, 8, 6, 6, 4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 0};

  class hec_ref;
    int d, umax, g0, gs, nz;
    longint sigma_init;
    longint sigma[$];
    longint gamma[$];
    int     prefix0[16];     // 1 when code i holds the prefix "0"
    bit     bits[$];
    longint unsigned words[$];
    bit     word_last[$];
    // event counters
    int n_high, n_low, n_esc, n_match, n_rescale, n_umax;

    function new(int d_, int umax_, int g0_, int gs_, int nz_, longint si);
      d = d_; umax = umax_; g0 = g0_; gs = gs_; nz = nz_; sigma_init = si;
      for (int i = 0; i < 16; i++) prefix0[i] = 0;
      n_high = 0; n_low = 0; n_esc = 0; n_match = 0; n_rescale = 0; n_umax = 0;
    endfunction

    function void put(longint unsigned v, int n);
      for (int b = n - 1; b >= 0; b--) bits.push_back(v[b]);
      while (bits.size() >= 64) begin
        longint unsigned w = 0;
        for (int b = 0; b < 64; b++) w = (w << 1) | longint'(bits.pop_front());
        words.push_back(w);
        word_last.push_back(1'b0);
      end
    endfunction

    function void gpo2(longint unsigned delta, int k);
      longint unsigned u = delta >> k;
      if (u < longint'(umax)) begin
        put(delta & ((64'd1 << k) - 1), k);
        put(1, 1);
        put(0, int'(u));
      end else begin
        put(delta, d);
        put(0, umax);
        n_umax++;
      end
    endfunction

    function int code_n(int i);
      return $clog2(2 * (L_REF[i] + 2) + 1);
    endfunction

    // one sample; first = pixel t = 0
    function void sample(int z, longint unsigned delta, bit first);
      longint sum;
      int k, kmax, idx, a, sym;
      if (first) begin
        if (sigma.size() <= z) begin sigma.push_back(0); gamma.push_back(0); end
        sigma[z] = sigma_init;
        gamma[z] = 1 << g0;
        put(delta, d);
        return;
      end
      sum = sigma[z] + 4 * longint'(delta);
      if (gamma[z] == (1 << gs) - 1) begin
        put(sum & 1, 1);
        sigma[z] = (sum + 1) / 2;
        gamma[z] = (gamma[z] + 1) / 2;
        n_rescale++;
      end else begin
        sigma[z] = sum;
        gamma[z] = gamma[z] + 1;
      end
      if (sigma[z] * 16384 > longint'(T_REF[0]) * gamma[z]) begin
        n_high++;
        kmax = (d - 2 > 2) ? d - 2 : 2;
        k = 0;
        for (int kk = 1; kk <= kmax; kk++)
          if (gamma[z] * (longint'(1) << (kk + 2)) <= sigma[z] + (49 * gamma[z]) / 32) k = kk;
        gpo2(delta, k);
      end else begin
        n_low++;
        idx = 0;
        for (int i = 0; i < 16; i++)
          if (sigma[z] * 16384 <= longint'(T_REF[i]) * gamma[z]) idx = i;
        a = L_REF[idx] + 2;
        if (delta > longint'(L_REF[idx])) begin
          gpo2(delta - L_REF[idx] - 1, 0);
          sym = L_REF[idx] + 1;
          n_esc++;
        end else sym = int'(delta);
        if (prefix0[idx] != 0) begin
          put(sym, code_n(idx));
          prefix0[idx] = 0;
          n_match++;
        end else if (sym == 0) begin
          prefix0[idx] = 1;
        end else begin
          put(a - 1 + sym, code_n(idx));
          n_match++;
        end
      end
    endfunction

    function void tail();
      for (int i = 0; i < 16; i++) begin
        int a = L_REF[i] + 2;
        put(prefix0[i] != 0 ? 2 * a : 2 * a - 1, code_n(i));
        prefix0[i] = 0;
      end
      for (int z = 0; z < nz; z++) put(sigma[z], 2 + d + gs);
      if (bits.size() > 0) put(0, 64 - bits.size());
      word_last[word_last.size() - 1] = 1'b1;
    endfunction
  endclass
endpackage
