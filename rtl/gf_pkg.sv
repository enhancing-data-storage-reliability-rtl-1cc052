// gf_pkg -- arithmetic in GF(2^9) and BCH code construction, shared by the
// encoder, the decoder stages and the testbenches.
//
// Field elements are 9-bit vectors in the polynomial basis {1, a, ..., a^8}
// of the primitive polynomial x^9 + x^4 + 1 (bit i = coefficient of a^i).
// The field size m = 9 is the one used for the NOR-flash code; the choice of
// primitive polynomial is this design's own, as none is named for it.
//
// bch_gen_poly(t) builds the generator polynomial of the binary narrow-sense
// BCH code that corrects t errors, g(x) = LCM(phi_1, phi_3, ..., phi_(2t-1)),
// where phi_i is the minimal polynomial of a^i. Only odd i are needed because
// a^(2i) shares the minimal polynomial of a^i. All functions are usable both
// in constant expressions (parameters) and in logic.
package gf_pkg;

  parameter int unsigned GF_M = 9;                    // field degree m
  parameter logic [GF_M:0] GF_POLY = 10'b10_0001_0001; // x^9 + x^4 + 1
  parameter int unsigned GF_Q = (1 << GF_M) - 1;     // multiplicative order 511
  parameter int unsigned T_MAX = 8;                   // largest supported t
  parameter int unsigned GEN_W = GF_M * T_MAX + 1;    // width of g(x) storage

  typedef logic [GF_M-1:0] gf_t;
  typedef logic [GEN_W-1:0] gen_poly_t;

  // a * alpha: shift up one degree, reduce by the primitive polynomial.
  function automatic gf_t gf_mul_alpha(gf_t a);
    gf_t r;
    r = {a[GF_M-2:0], 1'b0};
    if (a[GF_M-1]) r = r ^ GF_POLY[GF_M-1:0];
    return r;
  endfunction

  // General product by shift-and-add.
  function automatic gf_t gf_mul(gf_t a, gf_t b);
    gf_t r;
    gf_t x;
    r = '0;
    x = a;
    for (int i = 0; i < int'(GF_M); i++) begin
      if (b[i]) r = r ^ x;
      x = gf_mul_alpha(x);
    end
    return r;
  endfunction

  // alpha^e for any non-negative exponent.
  function automatic gf_t gf_alpha_pow(int unsigned e);
    gf_t r;
    int unsigned k;
    r = gf_t'(1);
    k = e % GF_Q;
    for (int unsigned i = 0; i < k; i++) r = gf_mul_alpha(r);
    return r;
  endfunction

  function automatic gf_t gf_square(gf_t a);
    return gf_mul(a, a);
  endfunction

  // Product of two polynomials over GF(2), both held as bit vectors.
  function automatic gen_poly_t gf2_poly_mul(gen_poly_t a, gen_poly_t b);
    gen_poly_t r;
    r = '0;
    for (int i = 0; i < int'(GEN_W); i++)
      if (b[i]) r = r ^ (a << i);
    return r;
  endfunction

  // Generator polynomial of the t-error-correcting BCH code over GF(2^9).
  function automatic gen_poly_t bch_gen_poly(int unsigned t);
    gen_poly_t g;
    gen_poly_t phi;
    gf_t       mp [GF_M+1];   // minimal polynomial, coefficients in GF(2^9)
    int unsigned c, deg;
    bit repeated;
    g = gen_poly_t'(1);
    for (int unsigned i = 1; i < 2 * t; i += 2) begin
      // The cyclotomic coset of i is {i * 2^k mod 511}. If it holds a smaller
      // (odd) member, phi_i was already multiplied in.
      repeated = 1'b0;
      c = i;
      for (int k = 0; k < int'(GF_M); k++) begin
        if (c < i) repeated = 1'b1;
        c = (c * 2) % GF_Q;
      end
      if (!repeated) begin
        for (int k = 0; k <= int'(GF_M); k++) mp[k] = '0;
        mp[0] = gf_t'(1);
        deg = 0;
        c = i;
        // multiply (x + a^c) over the distinct coset members
        for (int k = 0; k < int'(GF_M); k++) begin
          if (k == 0 || c != i) begin
            for (int j = int'(GF_M); j > 0; j--)
              mp[j] = mp[j-1] ^ gf_mul(mp[j], gf_alpha_pow(c));
            mp[0] = gf_mul(mp[0], gf_alpha_pow(c));
            deg++;
            c = (c * 2) % GF_Q;
          end
        end
        phi = '0;
        for (int k = 0; k <= int'(GF_M); k++) phi[k] = mp[k][0];
        g = gf2_poly_mul(g, phi);
      end
    end
    return g;
  endfunction

  // Degree of g(x): the number of parity bits n - k.
  function automatic int unsigned bch_parity_bits(int unsigned t);
    gen_poly_t g;
    int unsigned d;
    g = bch_gen_poly(t);
    d = 0;
    for (int unsigned i = 0; i < GEN_W; i++) if (g[i]) d = i;
    return d;
  endfunction

endpackage
