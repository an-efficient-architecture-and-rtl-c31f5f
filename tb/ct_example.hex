// Example code table: input codewords 0->4hA, X->5hB, 10->4hC, 11->8hD, 1X->6hE;
// flush words (null)->1h0, 1->2h1. One trie node per line, packed as
// {flush_len[4:0], flush_cw[15:0], term, cw_len[4:0], cw_or_ptr[15:0]}; root pointer 0.
0400024000a
04000000003
0400025000b
0800064000c
0800068000d
0800066000e
