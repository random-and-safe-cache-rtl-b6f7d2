// tb_util_pkg: helpers shared by the cache testbenches - the initial content
// of every memory line (a fixed function of the line address, so a
// testbench can predict any line it never wrote) and a byte-wise store merge.
//
// Nothing here comes from the paper; the line pattern is arbitrary.
package tb_util_pkg;
  import ras_pkg::*;

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int w = 0; w < WORDS; w++)
      l[w*WORD_W +: WORD_W] = {32'(a) ^ 32'h9e37_79b9, 24'h00_c0de, 8'(w)};
    return l;
  endfunction

  function automatic line_t merge_word(input line_t l, input int word, input logic [7:0] be,
                                       input word_t d);
    for (int b = 0; b < 8; b++)
      if (be[b]) l[(word*8 + b)*8 +: 8] = d[b*8 +: 8];
    return l;
  endfunction
endpackage
