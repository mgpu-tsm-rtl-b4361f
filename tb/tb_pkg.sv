// tb_pkg: helpers shared by the testbenches.
//
// init_word() is the content the behavioural DRAM bank returns for a word
// that was never written: the word's byte address XOR a constant, so every
// word of the 32 GB space has a distinct, predictable value.
package tb_pkg;
  import tsm_pkg::*;

  function automatic logic [WORD_BITS-1:0] init_word(paddr_t a);
    return a[31:0] ^ 32'hC0DE_0000;
  endfunction

  function automatic logic [LINE_BITS-1:0] init_line(paddr_t line_addr);
    logic [LINE_BITS-1:0] l;
    for (int unsigned w = 0; w < LINE_BITS / WORD_BITS; w++)
      l[w*WORD_BITS +: WORD_BITS] = init_word(line_addr + paddr_t'(4*w));
    return l;
  endfunction
endpackage
