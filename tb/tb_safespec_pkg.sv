// tb_safespec_pkg: reference contents of the memory and page tables seen by the
// testbenches. Line data and translations are pure functions of the address, so any
// response can be checked without a copy of the memory.
//   line_of(la): the 34-bit line address XORed with a constant, repeated in every
//                32-bit word, with the word number in the top byte.
//   pte_of(vpn): ppn = vpn[27:0] XOR 0x0345678; user = NOT vpn[35] (the upper half of
//                the address space is supervisor only).
//   unmapped(vpn): vpn[34:31] == 4'hF has no translation (walk faults).
package tb_safespec_pkg;
  import safespec_pkg::*;

  function automatic line_t line_of(laddr_t la);
    line_t l;
    for (int w = 0; w < LINE_W / 32; w++)
      l[32*w +: 32] = (32'(la) ^ 32'h0055_AA00) ^ (32'(w) << 24);
    return l;
  endfunction

  function automatic pte_t pte_of(vpn_t v);
    pte_t p;
    p.rsvd = '0;
    p.user = ~v[VPN_W-1];
    p.ppn  = v[PPN_W-1:0] ^ PPN_W'(28'h0345678);
    return p;
  endfunction

  function automatic bit unmapped(vpn_t v);
    return v[34:31] == 4'hF;
  endfunction

  function automatic laddr_t laddr_of(logic [VADDR_W-1:0] va);
    return {pte_of(va[VADDR_W-1:PAGE_OFF_W]).ppn, va[PAGE_OFF_W-1:LINE_OFF_W]};
  endfunction
endpackage
