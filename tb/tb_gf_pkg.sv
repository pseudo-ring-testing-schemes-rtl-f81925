// tb_gf_pkg: reference arithmetic for the testbenches, written independently of the RTL.
//
// gf_mul forms the carry-less product of two field elements and then reduces it
// modulo p(x) from the top bit down (the RTL multiplier works the other way, Horner
// style). glfsr2_next gives the next cell of a two-stage GLFSR; traj_addr gives the
// address at a trajectory position for the three GenA orders.
package tb_gf_pkg;

  // a*b in GF(2^m), p = full generator polynomial including the x^m term.
  function automatic int unsigned gf_mul(int unsigned a, int unsigned b, int unsigned m,
                                         int unsigned p);
    int unsigned prod = 0;
    for (int i = 0; i < int'(m); i++) if (b[i]) prod ^= a << i;
    for (int i = 2 * int'(m) - 2; i >= int'(m); i--) if (prod[i]) prod ^= p << (i - int'(m));
    return prod;
  endfunction

  // Fibonacci LFSR with the all-zero state inserted: next address after `s`.
  function automatic int unsigned lfsr_next(int unsigned s, int unsigned w, int unsigned taps);
    int unsigned mask = (1 << w) - 1;
    int unsigned fb   = $countones(s & taps) & 1;
    if ((s & (mask >> 1)) == 0) fb ^= 1;
    return ((s << 1) & mask) | fb;
  endfunction

  function automatic int unsigned taps_of(int unsigned w);
    case (w)
      2: return 'h3;    3: return 'h6;    4: return 'hC;    5: return 'h14;
      6: return 'h30;   7: return 'h60;   8: return 'hB8;   9: return 'h110;
      10: return 'h240; 11: return 'h500; 12: return 'h829; 13: return 'h100D;
      14: return 'h2015; 15: return 'h6000; 16: return 'hD008;
      default: return 0;
    endcase
  endfunction

endpackage
