// gf2m_ref_pkg: reference GF(2)[x]/f(x) arithmetic for the testbenches.
//
// gf_mul() multiplies LSB first (right-to-left shift-and-add): it walks the
// bits of b from b_0 upward, keeps t = a * x^i mod f, and adds t whenever
// b_i = 1. The hardware goes the other way (MSB first, Horner's rule), so the
// two share no structure. Vectors are M_MAX bits wide; only the low m bits
// are used. Works for any f, irreducible or not.
package gf2m_ref_pkg;

  localparam int unsigned M_MAX = 571;
  typedef logic [M_MAX-1:0] vec_t;

  function automatic vec_t low_mask(int unsigned m);
    vec_t v;
    v = '0;
    for (int unsigned i = 0; i < m; i++) v[i] = 1'b1;
    return v;
  endfunction

  function automatic vec_t gf_mul(vec_t a, vec_t b, vec_t f, int unsigned m);
    vec_t acc, t, mask;
    logic carry;
    mask = low_mask(m);
    acc  = '0;
    t    = a & mask;
    for (int unsigned i = 0; i < m; i++) begin
      if (b[i]) acc ^= t;
      carry = t[m-1];
      t     = (t << 1) & mask;
      if (carry) t ^= (f & mask);
    end
    return acc;
  endfunction

  // Random vector with the low m bits random, the rest zero.
  function automatic vec_t rand_vec(int unsigned m);
    vec_t v;
    for (int unsigned i = 0; i < M_MAX; i += 32) v[i +: 32] = $urandom();
    return v & low_mask(m);
  endfunction

endpackage
