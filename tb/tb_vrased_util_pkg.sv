// tb_vrased_util_pkg -- stimulus helpers shared by the VRASED testbenches.
//
// Random addresses are drawn mostly from the edges of the guarded regions
// (one below, first, last, one above) so that every range comparison is
// exercised on both sides; the rest are uniform over the 16-bit space.
package tb_vrased_util_pkg;
  import vrased_pkg::*;

  function automatic addr_t edge_of(addr_t lo, addr_t hi);
    unique case ($urandom_range(5))
      0: return addr_t'(lo - 1);
      1: return lo;
      2: return hi;
      3: return addr_t'(hi + 1);
      default: return addr_t'(lo + $urandom_range(32'(hi - lo)));
    endcase
  endfunction

  // An address near KR, CR, XS, MR or CTR, or anywhere.
  function automatic addr_t pick_addr();
    unique case ($urandom_range(5))
      0: return edge_of(K_MIN, K_MAX);
      1: return edge_of(CR_MIN, CR_MAX);
      2: return edge_of(XS_MIN, XS_MAX);
      3: return edge_of(MAC_ADDR, addr_t'(MAC_ADDR + MAC_SIZE - 1));
      4: return edge_of(CTR_MIN, CTR_MAX);
      default: return addr_t'($urandom);
    endcase
  endfunction

  // A PC value: often 0 (end of a core reset), often in or next to CR.
  function automatic addr_t pick_pc();
    unique case ($urandom_range(4))
      0: return RESET_PC;
      1, 2: return edge_of(CR_MIN, CR_MAX);
      3: return CR_MIN;
      default: return addr_t'($urandom);
    endcase
  endfunction

  function automatic bit chance(int unsigned percent);
    return $urandom_range(99) < percent;
  endfunction

endpackage
