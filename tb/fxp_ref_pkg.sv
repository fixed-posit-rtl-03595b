// fxp_ref_pkg -- reference model of fixed-posit arithmetic for the testbenches.
//
// Works on words of up to 64 bits for any (n, es, rs) with a fraction of at
// most 25 bits, and computes through IEEE-754 double precision rather than by
// the field arithmetic of the hardware: a word is decoded to a double by
// building the double's bit pattern from its scale and fraction, two doubles
// are multiplied (exactly, since two significands of at most 26 bits give at
// most 52 product bits) and the product's double fields are re-encoded.
// The conventions are those of the multiplier: the all-zero word is zero, a
// one followed by zeros is NaR, results saturate to the largest magnitude or
// to the smallest nonzero magnitude, and fraction bits are truncated.
package fxp_ref_pkg;

  typedef logic [63:0] word_t;

  function automatic int fbits(int n, int es, int rs);
    return n - 1 - rs - es;
  endfunction

  function automatic word_t nar_word(int n);
    return word_t'(1) << (n - 1);
  endfunction

  // Regime pattern for k, built as a bit string from the MSB of the field.
  function automatic word_t regime_bits(int k, int rs);
    word_t r = '0;
    for (int j = 0; j < rs; j++) begin
      bit b;
      if (k >= 0) b = (j < k + 1);     // k+1 ones, then zeros
      else        b = !(j < -k);       // -k zeros, then ones
      r = (r << 1) | word_t'(b);
    end
    return r;
  endfunction

  // Scale k*2^es + e of a word (not zero/NaR); also returns the fraction.
  function automatic void fields(input word_t w, input int n, input int es, input int rs,
                                 output bit s, output int scale, output longint f);
    int  fs = fbits(n, es, rs);
    bit  r0;
    int  m;
    int  k;
    int  e;
    s  = w[n-1];
    r0 = w[n-2];
    m  = 0;
    for (int i = n - 2; i >= n - 1 - rs; i--) begin
      if (w[i] == r0) m++;
      else break;
    end
    k = r0 ? m - 1 : -m;
    e = int'((w >> fs) & ((word_t'(1) << es) - 1));
    f = longint'(w & ((word_t'(1) << fs) - 1));
    scale = k * (1 << es) + e;
  endfunction

  // Value of a word as a double.
  function automatic real to_real(word_t w, int n, int es, int rs);
    bit s; int scale; longint f;
    int fs = fbits(n, es, rs);
    if (w == 0) return 0.0;
    fields(w, n, es, rs, s, scale, f);
    return $bitstoreal({s, 11'(scale + 1023), 52'(f) << (52 - fs)});
  endfunction

  // Largest and smallest scales of the format.
  function automatic int max_scale(int es, int rs);
    return (rs - 1) * (1 << es) + (1 << es) - 1;
  endfunction
  function automatic int min_scale(int es, int rs);
    return -rs * (1 << es);
  endfunction

  // Encode a double (nonzero, finite) by truncation, with saturation.
  // sat: 0 none, 1 saturated high, 2 saturated low.
  function automatic word_t from_real(input real x, input int n, input int es, input int rs,
                                      output int sat);
    logic [63:0] d = $realtobits(x);
    int     fs    = fbits(n, es, rs);
    bit     s     = d[63];
    int     scale = int'(d[62:52]) - 1023;
    longint f     = longint'(d[51:0] >> (52 - fs));
    word_t  mag;
    int     k, e;
    sat = 0;
    if (scale > max_scale(es, rs)) begin
      sat = 1;
      return (word_t'(s) << (n - 1)) | ((word_t'(1) << (n - 1)) - 1);
    end
    if (scale < min_scale(es, rs)) begin
      sat = 2;
      return (word_t'(s) << (n - 1)) | word_t'(1);
    end
    // floor division by 2^es
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    mag = (regime_bits(k, rs) << (es + fs)) | (word_t'(e) << fs) | word_t'(f);
    if (mag == 0) begin
      sat = 2;
      mag = 1;
    end
    return (word_t'(s) << (n - 1)) | mag;
  endfunction

  // Expected product of two words.
  function automatic word_t mul(input word_t a, input word_t b, input int n, input int es,
                                input int rs, output int sat);
    sat = 0;
    if (a == nar_word(n) || b == nar_word(n)) return nar_word(n);
    if (a == 0 || b == 0) return 0;
    return from_real(to_real(a, n, es, rs) * to_real(b, n, es, rs), n, es, rs, sat);
  endfunction

endpackage
