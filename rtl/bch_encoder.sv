// bch_encoder -- systematic parallel encoder for the binary t-error-correcting
// BCH code of length N = 2^BCH_M - 1 (default BCH(63,45), t = 3).
//
//   c(x) = m(x) x^(N-K) + rem( m(x) x^(N-K), g(x) )
// The remainder is linear in the message, so each message bit i selects a
// fixed row x^(N-K+i) mod g(x); the parity is the XOR of the selected rows.
// g(x) and the rows are computed while the module is elaborated (bch_pkg).
// The codeword is {msg, parity}: message bit i is the coefficient of
// x^(N-K+i), parity bit j that of x^j.
//
// The same circuit serves the decoder's re-encoding step: fed with the
// message part of a received word, its parity XOR the received parity is
// r(x) mod g(x).  The shared use is arbitrated outside this module.
// Purely combinational, one clock of logic.  Systematic encoding and its
// reuse for re-encoding follow the architecture; the parallel row-XOR form
// and computing g(x) at elaboration are this design's choices.
module bch_encoder
  import bch_pkg::*;
#(
  parameter int unsigned     BCH_M = 6,
  parameter int unsigned     T     = 3,
  parameter logic [BCH_M:0]  PRIM  = 7'b1000011,
  localparam int unsigned    N     = (1 << BCH_M) - 1,
  localparam bpoly_t         GPOLY = gen_poly(BCH_M, prim_t'(PRIM), T),
  localparam int unsigned    NK    = poly_deg(GPOLY),
  localparam int unsigned    K     = N - NK
) (
  input  logic [K-1:0]  msg,
  output logic [NK-1:0] parity,
  output logic [N-1:0]  codeword
);
  logic [NK-1:0] term [K];

  for (genvar i = 0; i < K; i++) begin : g_row
    localparam logic [NK-1:0] ROW = NK'(enc_row(GPOLY, NK, i));
    assign term[i] = msg[i] ? ROW : '0;
  end

  always_comb begin
    parity = '0;
    for (int i = 0; i < K; i++) parity ^= term[i];
  end

  assign codeword = {msg, parity};
endmodule
