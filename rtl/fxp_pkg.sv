// fxp_pkg -- shared constants and width helpers for the fixed-posit multiplier.
//
// A fixed-posit (N, ES, RS) word is laid out, from the most significant bit
// down, as: 1 sign bit, RS regime bits, ES exponent bits and FS = N-1-RS-ES
// fraction bits. The regime is a run of equal bits r, padded with the
// complement of r up to RS bits (a thermometer code); a run of m zeros gives
// k = -m, a run of m ones gives k = m-1, so k lies in [-RS, RS-1]. The value
// is (-1)^s * 2^(k*2^ES + e) * 1.f.
//
// The default configuration is (32, 6, 2): 23 fraction bits and a scale range
// of -128 .. +127, wider than IEEE-754 single precision (-126 .. +127).
// The helpers below give the widths of the signed k value, of the shifted k
// value (k * 2^ES) and of the exponent-adder sum for a given configuration.
package fxp_pkg;

  // Default configuration (N, ES, RS) = (32, 6, 2).
  localparam int unsigned FXP_N  = 32;
  localparam int unsigned FXP_ES = 6;
  localparam int unsigned FXP_RS = 2;

  // Number of fraction bits.
  function automatic int unsigned frac_bits(int unsigned n, int unsigned es, int unsigned rs);
    return n - 1 - rs - es;
  endfunction

  // Width of the signed k value, which spans [-rs, rs-1].
  function automatic int unsigned k_bits(int unsigned rs);
    return $clog2(rs) + 1;
  endfunction

  // Width of the signed shifted k value k * 2^es.
  function automatic int unsigned sk_bits(int unsigned es, int unsigned rs);
    return k_bits(rs) + es;
  endfunction

  // Width of the signed exponent-adder sum: two shifted k values, two
  // exponents and the carry, with headroom for the overflow check.
  function automatic int unsigned sum_bits(int unsigned es, int unsigned rs);
    return sk_bits(es, rs) + 2;
  endfunction

endpackage
