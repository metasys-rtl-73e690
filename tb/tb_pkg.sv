// tb_pkg: helpers shared by the testbenches.
//
// xlate() is the address translation the TLB model applies and the reference
// that the checks use: pages keep their offset, the virtual page number is
// scrambled (vpn XOR 0x2A5) and moved up by 256 MiB so that consecutive virtual
// pages land on non-consecutive physical pages. Addresses with any of bits
// 63:36 set have no translation (fault).
package tb_pkg;
  import metasys_pkg::*;

  function automatic logic xlate_fault(input vaddr_t va);
    return va[63:36] != '0;
  endfunction

  function automatic paddr_t xlate(input vaddr_t va);
    logic [63:0] vpn;
    vpn = va >> PAGE_LOG2;
    return PADDR_W'((((vpn ^ 64'h2A5) + 64'h1_0000) << PAGE_LOG2) | (va & 64'hFFF));
  endfunction
endpackage
