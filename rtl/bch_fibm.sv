// bch_fibm -- key-equation solver: inversion-free Berlekamp-Massey algorithm
// simplified for binary BCH codes, one iteration per clock.
//
// For binary codes every odd-numbered BM step has a zero discrepancy, so only
// t steps are needed.  With S_0 = 1, step r = 0..t-1 computes
//   delta    = sum_i sigma_i S_(2r+1-i)              (t+1 GF multipliers)
//   sigma'   = gamma sigma(x) + delta x lambda(x)     (2(t+1) GF multipliers)
//   if delta != 0 and k >= 0:  lambda = x sigma, gamma = delta, k = -k,
//                              L = 2r + 1 - L
//   else:                      lambda = x^2 lambda,             k = k + 2
// starting from sigma = lambda = gamma = 1, k = 0, L = 0.  No field inversion
// is used.  L is the length of the shortest LFSR that generates the
// syndromes; L > t (flag too_long) means more than t errors, in which case
// the T+1 coefficients kept here are not the whole polynomial.  The result is a non-zero multiple of the error-locator polynomial
// sigma(x) of eq. (15); only its roots matter downstream.  This formulation
// is the design's own stand-in for the FiBM variant the architecture names.
//
// Interface and timing: start (while idle) loads S_1..S_2T; done pulses T
// clocks later with sigma, degree (index of the highest non-zero
// coefficient), length L and too_long valid and held until the next start.
module bch_fibm
  import bch_pkg::*;
#(
  parameter int unsigned    BCH_M = 6,
  parameter int unsigned    T     = 3,
  parameter logic [BCH_M:0] PRIM  = 7'b1000011,
  localparam int unsigned   DW    = $clog2(T + 1),
  localparam int unsigned   LW    = $clog2(2 * T + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [2*T:1][BCH_M-1:0]   synd,
  output logic                      busy,
  output logic                      done,
  output logic [T:0][BCH_M-1:0]     sigma,
  output logic [DW-1:0]             degree,
  output logic [LW-1:0]             length,
  output logic                      too_long
);
  localparam int unsigned RW = $clog2(T + 1);

  typedef logic [BCH_M-1:0] el_t;

  logic [2*T:0][BCH_M-1:0] s_q;      // s_q[0] = 1
  logic [T:0][BCH_M-1:0]   sig_q, lam_q, sig_n, lam_n;
  el_t                     gam_q, gam_n, delta;
  int                      k_q, k_n;
  logic [LW-1:0]           l_q, l_n;
  logic [RW-1:0]           r_q;
  logic                    run_q;

  function automatic el_t mul(el_t x, el_t y);
    return BCH_M'(gf_mul(gf_t'(x), gf_t'(y), BCH_M, prim_t'(PRIM)));
  endfunction

  always_comb begin
    delta = '0;
    for (int i = 0; i <= T; i++) begin
      int j;
      j = 2 * int'(r_q) + 1 - i;
      if (j >= 0 && j <= 2 * T) delta ^= mul(sig_q[i], s_q[j]);
    end
    for (int i = 0; i <= T; i++)
      sig_n[i] = mul(gam_q, sig_q[i]) ^ ((i >= 1) ? mul(delta, lam_q[i-1]) : '0);
    if (delta != '0 && k_q >= 0) begin
      lam_n[0] = '0;
      for (int i = 1; i <= T; i++) lam_n[i] = sig_q[i-1];
      gam_n = delta;
      k_n   = -k_q;
      l_n   = LW'(2 * int'(r_q) + 1) - l_q;
    end else begin
      lam_n[0] = '0;
      lam_n[1] = '0;
      for (int i = 2; i <= T; i++) lam_n[i] = lam_q[i-2];
      gam_n = gam_q;
      k_n   = k_q + 2;
      l_n   = l_q;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_q   <= '0;
      sig_q <= '0;
      lam_q <= '0;
      gam_q <= '0;
      k_q   <= 0;
      l_q   <= '0;
      r_q   <= '0;
      run_q <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (run_q) begin
        sig_q <= sig_n;
        lam_q <= lam_n;
        gam_q <= gam_n;
        k_q   <= k_n;
        l_q   <= l_n;
        r_q   <= r_q + 1'b1;
        if (int'(r_q) == T - 1) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end else if (start) begin
        s_q      <= {synd, el_t'(1)};
        sig_q    <= '0;
        sig_q[0] <= el_t'(1);
        lam_q    <= '0;
        lam_q[0] <= el_t'(1);
        gam_q    <= el_t'(1);
        k_q      <= 0;
        l_q      <= '0;
        r_q      <= '0;
        run_q    <= 1'b1;
      end
    end
  end

  always_comb begin
    degree = '0;
    for (int i = 0; i <= T; i++) if (sig_q[i] != '0) degree = DW'(i);
  end

  assign sigma    = sig_q;
  assign length   = l_q;
  assign too_long = (l_q > LW'(T));
  assign busy  = run_q;
endmodule
