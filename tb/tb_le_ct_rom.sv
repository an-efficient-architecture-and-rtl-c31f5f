// tb_le_ct_rom: checks the two ways of filling the code-table ROM.
// Default contents (stand-in tables): every one of the 256 words is compared
// with an entry rebuilt here from the stand-in code definition (code i holds
// 2A words, A = L_i + 2, laid out back to back from address 0; root children
// at b+s, inner-node children at b+A+s; n = clog2(2A+1) bit codewords) and
// words past the last code must be zero. File contents: the example table of
// the paper's Table I (tb/ct_example.hex) is read and its six nodes decoded.
// The read is combinational, so each address is checked in the same cycle.
// The trie word layout is the paper's; the stand-in tables are this
// design's.
module tb_le_ct_rom;
  import hec_pkg::*;
  localparam int L [16] = '{12, 10, 8, 6, 6, 4, 4, 4, 2, 2, 2, 2, 2, 2, 2, 0};
  logic [CT_PTR_W-1:0] addr_a = '0, addr_b = '0;
  ct_entry_t data_a, data_b;
  int checks = 0, failures = 0;

  le_ct_rom u_a (.addr(addr_a), .data(data_a));
  le_ct_rom #(.INIT_FILE("tb/ct_example.hex")) u_b (.addr(addr_b), .data(data_b));

  function automatic ct_entry_t standin(int addr);
    ct_entry_t e;
    int b, a, n;
    e = '0;
    b = 0;
    for (int i = 0; i < 16; i++) begin
      a = L[i] + 2;
      n = $clog2(2 * a + 1);
      if (addr >= b && addr < b + a) begin
        e.flush_len = LE_LEN_W'(n); e.flush_cw = LE_CW_W'(2 * a - 1); e.cw_len = LE_LEN_W'(n);
        if (addr == b) begin e.term = 0; e.cw = LE_CW_W'(b + a); end
        else begin e.term = 1; e.cw = LE_CW_W'(a - 1 + addr - b); end
      end else if (addr >= b + a && addr < b + 2 * a) begin
        e.flush_len = LE_LEN_W'(n); e.flush_cw = LE_CW_W'(2 * a); e.cw_len = LE_LEN_W'(n);
        e.term = 1; e.cw = LE_CW_W'(addr - b - a);
      end
      b += 2 * a;
    end
    return e;
  endfunction

  // Table I nodes: {flush_len, flush_cw, term, cw_len, cw}
  ct_entry_t tab1 [6];

  initial begin
    int b;
    tab1[0] = '{1, 0, 1, 4, 'hA};   // "0"  -> 1010
    tab1[1] = '{1, 0, 0, 0, 3};     // "1"  -> children at 3
    tab1[2] = '{1, 0, 1, 5, 'hB};   // "X"  -> 01011
    tab1[3] = '{2, 1, 1, 4, 'hC};   // "10" -> 1100
    tab1[4] = '{2, 1, 1, 8, 'hD};   // "11" -> 00001101
    tab1[5] = '{2, 1, 1, 6, 'hE};   // "1X" -> 001110
    for (int a = 0; a < CT_DEPTH; a++) begin
      addr_a = CT_PTR_W'(a);
      #1;
      checks++;
      if (data_a != standin(a)) begin
        failures++;
        $display("FAIL: stand-in word %0d = %h, expected %h", a, data_a, standin(a));
      end
    end
    b = 0;
    for (int i = 0; i < 16; i++) b += 2 * (L[i] + 2);
    checks++;
    if (b != 200 || b > CT_DEPTH) begin failures++; $display("FAIL: tables use %0d words", b); end
    for (int a = 0; a < 6; a++) begin
      addr_b = CT_PTR_W'(a);
      #1;
      checks++;
      if (data_b != tab1[a]) begin
        failures++;
        $display("FAIL: Table I word %0d = %h, expected %h", a, data_b, tab1[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
