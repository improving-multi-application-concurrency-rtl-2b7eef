// mask_tb_pkg: reference model shared by the testbenches.
//
// Memory contents are a pure function of the address, so every page table
// in the simulated memory is valid and a testbench can predict any
// translation without storing tables: the 64-bit word at byte address a
// holds a page table entry whose physical page number (bits 39:12) is a
// hash of a. ref_translate walks the four levels the same way the hardware
// does (index = 9 VPN bits per level, entry address = base*4096 + 8*index).
package mask_tb_pkg;
  import mask_pkg::*;

  function automatic logic [PPN_W-1:0] hash_ppn(input logic [PA_W-1:0] a);
    logic [63:0] x;
    x = {24'h0, a} * 64'h9E37_79B9_7F4A_7C15;
    x = x ^ (x >> 29);
    return x[PPN_W-1:0] ^ x[PPN_W+20:21];
  endfunction

  function automatic logic [63:0] mem_word(input logic [PA_W-1:0] a);
    logic [PA_W-1:0] wa;
    wa = {a[PA_W-1:3], 3'b000};
    return {24'h0, hash_ppn(wa), 12'h0};
  endfunction

  function automatic logic [WORDS*64-1:0] mem_line(input logic [PA_W-1:0] a);
    logic [WORDS*64-1:0] l;
    for (int w = 0; w < WORDS; w++)
      l[64*w +: 64] = mem_word({a[PA_W-1:7], 4'(w), 3'b000});
    return l;
  endfunction

  function automatic logic [PPN_W-1:0] ref_translate(input logic [PPN_W-1:0] root,
                                                     input logic [VPN_W-1:0] vpn);
    logic [PPN_W-1:0] b;
    b = root;
    for (int l = 1; l <= PT_LEVELS; l++)
      b = pte_ppn(mem_word(pte_addr(b, pt_index(vpn, l))));
    return b;
  endfunction
endpackage
