// sphynx_tb_pkg: instruction memory contents shared by the testbenches.
//
// Every testbench and the L2 model agree on what instruction lives at a byte
// address, so a fetched word can be checked without keeping a memory image:
// the word at aligned address a is {a ^ 32'h5A5A_C3C3, ~a * 32'h9E37_79B9}.
package sphynx_tb_pkg;
  import sphynx_pkg::*;

  function automatic inst_t inst_at(input addr_t a);
    addr_t w;
    w = {a[ADDR_W-1:WOFF_W], WOFF_W'(0)};
    return {w ^ 32'h5A5A_C3C3, (~w) * 32'h9E37_79B9};
  endfunction

  function automatic line_t line_at(input addr_t a);
    line_t l;
    addr_t base;
    base = {a[ADDR_W-1:OFF_W], OFF_W'(0)};
    for (int unsigned k = 0; k < WORDS; k++)
      l[k*INST_W +: INST_W] = inst_at(base + addr_t'(k * (INST_W / 8)));
    return l;
  endfunction
endpackage
