// tb_ref_pkg -- reference arithmetic for the testbenches, written
// independently of the RTL: products are formed in full and then reduced by
// long division; BCH parity is long division by a generator polynomial given
// as a literal constant; syndromes are Horner evaluations of the whole
// received word.
//
// Generator polynomials (bit i = coefficient of x^i):
//   BCH(63,45), t = 3, GF(2^6) from x^6 + x + 1:     g = 0x782CF  (degree 18)
//   BCH(31,16), t = 3, GF(2^5) from x^5 + x^2 + 1:   g = 0x8FAF   (degree 15)
//   BCH(63,36), t = 5, GF(2^6) from x^6 + x + 1:     g = 0x86E8113 (degree 27)
package tb_ref_pkg;

  typedef logic [63:0]  w64_t;
  typedef logic [255:0] w256_t;

  localparam w256_t G_63_45 = 256'h782CF;
  localparam w256_t G_31_16 = 256'h8FAF;
  localparam w256_t G_63_36 = 256'h86E8113;

  // A(x) B(x) mod (x^m + f_low), m <= 64.
  function automatic w64_t big_mul(w64_t a, w64_t b, int m, w64_t f_low);
    logic [127:0] prod = '0;
    logic [127:0] fpoly;
    for (int i = 0; i < m; i++) if (b[i]) prod ^= (128'(a) << i);
    fpoly = (128'(1) << m) | 128'(f_low);
    for (int d = 2 * m - 2; d >= m; d--) if (prod[d]) prod ^= (fpoly << (d - m));
    return w64_t'(prod);
  endfunction

  // Small-field product: full product then reduction by prim (x^m included).
  function automatic int sm_mul(int a, int b, int m, int prim);
    int prod = 0;
    for (int i = 0; i < m; i++) if (((b >> i) & 1) != 0) prod ^= (a << i);
    for (int d = 2 * m - 2; d >= m; d--) if (((prod >> d) & 1) != 0) prod ^= (prim << (d - m));
    return prod;
  endfunction

  function automatic int sm_pow(int e, int m, int prim);
    int r = 1;
    int n = (1 << m) - 1;
    for (int i = 0; i < e % n; i++) r = sm_mul(r, 2, m, prim);
    return r;
  endfunction

  // v(x) mod g(x), deg g = nk.
  function automatic w256_t poly_mod(w256_t v, w256_t g, int nk);
    for (int d = 255; d >= nk; d--) if (v[d]) v ^= (g << (d - nk));
    return v;
  endfunction

  // Systematic codeword {msg, rem(msg x^nk, g)}, n bits.
  function automatic w256_t encode(w256_t msg, w256_t g, int nk);
    w256_t sh = msg << nk;
    return sh | poly_mod(sh, g, nk);
  endfunction

  // r(alpha^i) for an n-bit word, Horner from the top coefficient.
  function automatic int eval_at(w256_t r, int n, int i, int m, int prim);
    int acc = 0;
    int ai  = sm_pow(i, m, prim);
    for (int j = n - 1; j >= 0; j--) acc = sm_mul(acc, ai, m, prim) ^ int'(r[j]);
    return acc;
  endfunction

  // Random n-bit error pattern of the given weight.
  function automatic w256_t rand_err(int n, int weight);
    w256_t e = '0;
    int    placed = 0;
    while (placed < weight) begin
      automatic int p = int'($urandom_range(n - 1, 0));
      if (!e[p]) begin
        e[p] = 1'b1;
        placed++;
      end
    end
    return e;
  endfunction

  function automatic w64_t rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
