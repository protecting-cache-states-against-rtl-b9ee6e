// star_tb_pkg: helpers shared by the STAR cache testbenches.
//
// pattern() gives the initial contents of every memory line, so that models
// need no preloading and checkers can predict any line's data: 64-bit word w
// of line address a is {a (42 bits), the constant 19'h5A5A5, w (3 bits)}.
package star_tb_pkg;
  import star_pkg::*;

  function automatic word_t pattern_word(line_addr_t a, int unsigned w);
    return {a, 19'h5_A5A5, 3'(w)};
  endfunction

  function automatic line_t pattern(line_addr_t a);
    line_t l;
    for (int w = 0; w < LINE_W / WORD_W; w++) l[w*WORD_W +: WORD_W] = pattern_word(a, w);
    return l;
  endfunction

  // expected word after a byte-masked store of d with strobes s over old word o
  function automatic word_t merge64(word_t o, word_t d, logic [WSTRB_W-1:0] s);
    word_t r = o;
    for (int b = 0; b < WSTRB_W; b++) if (s[b]) r[b*8 +: 8] = d[b*8 +: 8];
    return r;
  endfunction
endpackage
