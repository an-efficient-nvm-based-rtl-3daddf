// nvm_tb_pkg: helpers shared by the testbenches.
//
// init_word() gives the content a main-memory word holds before anything
// writes it: a fixed hash of its word address. The memory model and the
// testbenches' reference models use the same formula, so expected read data
// can be worked out without storing an initial memory image.
package nvm_tb_pkg;
  import nvm_pkg::*;

  function automatic word_t init_word(input logic [ADDR_W-1:0] byte_addr);
    logic [31:0] a;
    a = 32'(byte_addr >> 2);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_0F0F;
  endfunction

  function automatic blk_t init_blk(input baddr_t ba);
    blk_t b;
    for (int w = 0; w < WORDS_PER_BLK; w++)
      b[w*WORD_W +: WORD_W] = init_word({ba, OFF_W'(w * 4)});
    return b;
  endfunction
endpackage
