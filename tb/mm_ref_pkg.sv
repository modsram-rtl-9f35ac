// mm_ref_pkg -- reference arithmetic for the ModSRAM testbenches.
//
// Plain, slow big-number helpers written independently of the design: a
// shift-and-subtract modular multiplication (one bit of the multiplier per
// step, full comparisons), modular doubling for the overflow table, the
// look-up rows the host must load, and random operands built from 32-bit
// $urandom words. Numbers are held in 520-bit vectors; n may be up to 512.
package mm_ref_pkg;

  typedef logic [519:0] big_t;

  // Random value below 2^n.
  function automatic big_t rand_bits(int n);
    big_t v = '0;
    for (int i = 0; i < 520; i += 32) v[i +: 32] = $urandom;
    for (int i = n; i < 520; i++) v[i] = 1'b0;
    return v;
  endfunction

  // Random value in [0, lim).
  function automatic big_t rand_below(big_t lim, int n);
    big_t v;
    do v = rand_bits(n); while (v >= lim);
    return v;
  endfunction

  // a * b mod p, bit-serial interleaved multiplication with full reduction.
  function automatic big_t mod_mul(big_t a, big_t b, big_t p, int n);
    big_t c = '0;
    big_t bb = b % p;
    for (int i = n - 1; i >= 0; i--) begin
      c = c << 1;
      if (c >= p) c = c - p;
      if (a[i]) begin
        c = c + bb;
        if (c >= p) c = c - p;
      end
    end
    return c;
  endfunction

  // k * 2^sh mod p by repeated modular doubling.
  function automatic big_t mod_shl(big_t k, int sh, big_t p);
    big_t v = k % p;
    for (int i = 0; i < sh; i++) begin
      v = v << 1;
      if (v >= p) v = v - p;
    end
    return v;
  endfunction

  // LUT-radix4 row for Booth digit code d (0:0, 1:+1, 2:+2, 3:-2, 4:-1).
  function automatic big_t lut_r4(int d, big_t b, big_t p);
    big_t b1 = b % p;
    big_t b2 = mod_shl(b, 1, p);
    case (d)
      1: return b1;
      2: return b2;
      3: return (b2 == 0) ? big_t'(0) : p - b2;
      4: return (b1 == 0) ? big_t'(0) : p - b1;
      default: return '0;
    endcase
  endfunction

  // LUT-overflow row k: k * 2^(n+1) mod p.
  function automatic big_t lut_ov(int k, big_t p, int n);
    return mod_shl(big_t'(k), n + 1, p);
  endfunction

endpackage
