// sic_ref_pkg: bit-true reference arithmetic for the testbenches of the
// self-interference canceller, written with plain integer operations
// (independent of the RTL's structure). Values are signed integers of a
// Q-bit two's complement format with FRAC fractional bits.
package sic_ref_pkg;

  function automatic longint satq(longint v, int q);
    longint hi = (longint'(1) <<< (q - 1)) - 1;
    longint lo = -(longint'(1) <<< (q - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Sign-extend the low q bits of a vector.
  function automatic longint sx(logic [63:0] b, int q);
    longint v = longint'(b) & ((longint'(1) <<< q) - 1);
    if (v >= (longint'(1) <<< (q - 1))) v -= (longint'(1) <<< q);
    return v;
  endfunction

  // Fixed-point product, truncated and saturated.
  function automatic longint mulq(longint a, longint b, int q, int frac);
    return satq((a * b) >>> frac, q);
  endfunction

  function automatic longint addq(longint a, longint b, int q);
    return satq(a + b, q);
  endfunction

  // Random value in [-2^(bits-1), 2^(bits-1)-1].
  function automatic longint rnd(int bits);
    return sx(64'($urandom), bits);
  endfunction

endpackage
