// bch_syndrome -- parallel syndrome generator working on the re-encoding
// remainder b(x) = r(x) mod g(x).
//
// Because g(alpha^i) = 0 for i = 1..2t, S_i = r(alpha^i) = b(alpha^i).  The t
// odd syndromes are evaluated in parallel, each as a constant GF(2^m) matrix
// (S_i = XOR over bits b_l set of alpha^(i l)); the even ones follow from
// S_2j = S_j^2, as usual for binary BCH codes.  nonzero flags a detected
// error.  Working on the (N-K)-bit remainder instead of the N-bit word is
// what the re-encoding pretreatment buys.  Purely combinational.  Parallel
// odd syndromes with squaring follow the architecture; evaluating r mod g
// directly, instead of the remainders r mod phi_i by each minimal
// polynomial, is this design's choice and gives the same values.
// synd[i] holds S_i, i = 1..2T.
module bch_syndrome
  import bch_pkg::*;
#(
  parameter int unsigned    BCH_M = 6,
  parameter int unsigned    T     = 3,
  parameter logic [BCH_M:0] PRIM  = 7'b1000011,
  localparam int unsigned   N     = (1 << BCH_M) - 1,
  localparam int unsigned   NK    = poly_deg(gen_poly(BCH_M, prim_t'(PRIM), T))
) (
  input  logic [NK-1:0]               rem_in,
  output logic [2*T:1][BCH_M-1:0]     synd,
  output logic                        nonzero
);
  logic [T:1][BCH_M-1:0] odd;   // odd[j] = S_(2j-1)

  for (genvar j = 1; j <= T; j++) begin : g_odd
    logic [BCH_M-1:0] term [NK];
    for (genvar l = 0; l < NK; l++) begin : g_l
      localparam logic [BCH_M-1:0] AP = BCH_M'(gf_pow(((2 * j - 1) * l) % N, BCH_M, prim_t'(PRIM)));
      assign term[l] = rem_in[l] ? AP : '0;
    end
    always_comb begin
      odd[j] = '0;
      for (int l = 0; l < NK; l++) odd[j] ^= term[l];
    end
  end

  always_comb begin
    for (int i = 1; i <= 2 * T; i++) begin
      if (i % 2 == 1) synd[i] = odd[(i + 1) / 2];
      else            synd[i] = BCH_M'(gf_mul(gf_t'(synd[i/2]), gf_t'(synd[i/2]), BCH_M, prim_t'(PRIM)));
    end
    nonzero = |synd;
  end
endmodule
