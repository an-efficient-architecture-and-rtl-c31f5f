// le_ct_rom: low-entropy code-table ROM, asynchronous read.
//
// Every word is one node of a code-table trie: (flush word of the node's
// parent, then either a terminal output codeword or the base pointer of the
// node's children). A walk adds each input symbol to the current pointer, so
// the children of a node lie at consecutive addresses ptr + symbol. Reading
// the word at a node's child pointer yields that node's own flush word, which
// is how the image tail obtains the flush codeword of every unfinished prefix.
//
// The read is combinational (distributed/LUT RAM), so that the address update
// loop of the lookup closes in one cycle without a read-after-write hazard.
// Contents: INIT_FILE (hex, one ct_entry_t per line) when given, otherwise the
// stand-in tables of hec_pkg::ct_standin_entry().
//
// The trie word layout follows the paper's example table; the field widths
// and the stand-in contents are this implementation's (the standard's tables
// are not reproduced). With the stand-in contents many ROM bits are constant
// (short codewords in 16-bit fields), which synthesis reports as idle outputs.
module le_ct_rom
  import hec_pkg::*;
#(
  parameter string INIT_FILE = ""
) (
  input  logic [CT_PTR_W-1:0] addr,
  output ct_entry_t           data
);
  ct_entry_t mem [CT_DEPTH];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
    else for (int a = 0; a < CT_DEPTH; a++) mem[a] = ct_standin_entry(a);
  end

  assign data = mem[addr];
endmodule
