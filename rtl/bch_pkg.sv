// bch_pkg -- shared constants and elaboration-time arithmetic for the BCH
// protected GF(2^m) multiplier.
//
// The code field GF(2^BCH_M) is built from a primitive polynomial PRIM whose
// bit i is the coefficient of x^i (x^BCH_M included).  Field elements are
// carried in the low BCH_M bits of a gf_t.  The functions below are used in
// two ways: with constant arguments, to compute tables while a module is
// elaborated (powers of alpha, the generator polynomial, encoder rows), and
// with signal arguments, as combinational GF(2^m) multipliers.
//
// gen_poly() forms g(x) as the product of (x + alpha^j) over every j in the
// cyclotomic cosets of 1..2t, which equals the LCM of the minimal polynomials
// phi_1..phi_2t.  Codes up to BCH_M = MAXM (n = 255) are supported.
package bch_pkg;

  localparam int unsigned MAXM = 8;
  localparam int unsigned MAXN = (1 << MAXM) - 1;

  typedef logic [MAXM-1:0] gf_t;      // element of GF(2^m), m <= MAXM
  typedef logic [MAXM-1:0] prim_t;    // primitive polynomial; bits above m-1 are ignored
  typedef logic [MAXN:0]   bpoly_t;   // binary polynomial of degree <= MAXN

  // a * b in GF(2^m) defined by prim (shift-and-add, LSB of b first).
  function automatic gf_t gf_mul(gf_t a, gf_t b, int unsigned m, prim_t prim);
    gf_t r, aa, mask;
    r    = '0;
    aa   = a;
    mask = gf_t'((1 << m) - 1);
    for (int unsigned i = 0; i < MAXM; i++) begin
      if (i < m) begin
        if (b[i]) r ^= aa;
        if (aa[m-1]) aa = ((aa << 1) ^ prim[MAXM-1:0]) & mask;
        else         aa = (aa << 1) & mask;
      end
    end
    return r;
  endfunction

  // alpha^e, alpha = x.
  function automatic gf_t gf_pow(int unsigned e, int unsigned m, prim_t prim);
    int unsigned n = (1 << m) - 1;
    gf_t r = gf_t'(1);
    for (int unsigned i = 0; i < e % n; i++) r = gf_mul(r, gf_t'(2), m, prim);
    return r;
  endfunction

  // Generator polynomial of the t-error-correcting binary BCH code of length
  // 2^m - 1: the product of (x + alpha^j) over the conjugates of alpha^1..alpha^2t.
  function automatic bpoly_t gen_poly(int unsigned m, prim_t prim, int unsigned t);
    int unsigned n = (1 << m) - 1;
    gf_t    g [MAXN+1];
    gf_t    nxt [MAXN+1];
    int unsigned deg = 0;
    bpoly_t res = '0;
    logic   in_set;
    for (int unsigned i = 0; i <= MAXN; i++) g[i] = '0;
    g[0] = gf_t'(1);
    for (int unsigned j = 1; j < n; j++) begin
      in_set = 1'b0;
      for (int unsigned i = 1; i <= 2 * t; i++) begin
        int unsigned c = i % n;
        for (int unsigned s = 0; s < m; s++) begin
          if (c == j) in_set = 1'b1;
          c = (c * 2) % n;
        end
      end
      if (in_set) begin
        gf_t aj = gf_pow(j, m, prim);
        for (int unsigned i = 0; i <= MAXN; i++) nxt[i] = '0;
        for (int unsigned i = 0; i <= deg; i++) begin
          nxt[i+1] ^= g[i];
          nxt[i]   ^= gf_mul(g[i], aj, m, prim);
        end
        deg++;
        for (int unsigned i = 0; i <= MAXN; i++) g[i] = nxt[i];
      end
    end
    for (int unsigned i = 0; i <= MAXN; i++) res[i] = g[i][0];
    return res;
  endfunction

  function automatic int unsigned poly_deg(bpoly_t p);
    int unsigned d = 0;
    for (int unsigned i = 0; i <= MAXN; i++) if (p[i]) d = i;
    return d;
  endfunction

  // x^(nk + i) mod g(x), where nk = deg g: row i of the parallel encoder.
  function automatic bpoly_t enc_row(bpoly_t g, int unsigned nk, int unsigned i);
    bpoly_t low  = g & ((bpoly_t'(1) << nk) - 1);
    bpoly_t r    = low;
    logic   msb;
    for (int unsigned s = 0; s < i; s++) begin
      msb = r[nk-1];
      r   = (r << 1) & ((bpoly_t'(1) << nk) - 1);
      if (msb) r ^= low;
    end
    return r;
  endfunction

  // j is a linearised exponent (1, 2, 4, 8, ...): x^j belongs to the affine part.
  function automatic logic is_pow2(int unsigned j);
    return (j != 0) && ((j & (j - 1)) == 0);
  endfunction

endpackage
