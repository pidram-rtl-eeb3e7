// tb_pkg: helpers shared by the PiDRAM testbenches.
//
// init_block() gives the contents a DRAM cache block holds before anything
// is written to it: each 32-bit word is the block's key (bank, row, block
// column) XOR a word index pattern, so every block differs from every other.
// The DDR3 model and the testbenches' reference memories both use it.
package tb_pkg;
  import pidram_pkg::*;

  typedef logic [BANK_W+ROW_W+7-1:0] key_t;   // bank, row, block column (7 bits)

  function automatic key_t key_of(input bank_t b, input row_t r, input logic [6:0] bc);
    return {b, r, bc};
  endfunction

  function automatic key_t key_of_pa(input pa_t pa);
    return {pa[15:13], pa[29:16], pa[12:6]};
  endfunction

  function automatic blk_t init_block(input key_t k);
    blk_t v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = {8'(i) ^ 8'h5A, 24'(k)};
    return v;
  endfunction

  function automatic blk_t rand_block();
    blk_t v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
endpackage
