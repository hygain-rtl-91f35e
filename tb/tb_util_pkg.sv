// tb_util_pkg: helpers shared by the testbenches: the initial contents of
// main memory (a function of the line address, so a reference model can
// recompute it) and random request generation.
package tb_util_pkg;
  import hygain_pkg::*;

  // Contents of a line never written: every 32-bit word is a hash of the
  // line address and the word index.
  function automatic line_t init_line(addr_t line_addr);
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++)
      l[w*32 +: 32] = (line_addr * 32'h9E37_79B9) ^ (32'(w) * 32'h85EB_CA6B) ^ 32'h5A5A_0F0F;
    return l;
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int w = 0; w < LINE_BITS / 32; w++) l[w*32 +: 32] = $urandom;
    return l;
  endfunction

  // a store of one 8-byte word at a random position of the line
  function automatic bmask_t rand_word_mask();
    bmask_t m;
    m = '0;
    m[($urandom % 8) * 8 +: 8] = 8'hFF;
    return m;
  endfunction

endpackage
