// bch_brs_chien -- root finder for the error-locator polynomial: the
// Berlekamp-Rumsey-Solomon (BRS) affine-polynomial split combined with a
// Chien search.
//
// sigma(x) is split as A(x) + B(x).  A(x) = sigma_0 + sum sigma_j x^j over
// j = 1, 2, 4, 8, ... is an affine polynomial: its linear part L(y) satisfies
// L(y) = sum_k y_k L(alpha^k) for y = sum_k y_k alpha^k (standard basis).  So
// once the BCH_M table entries L(alpha^k) are known, A(y) for any y is an
// XOR of table entries selected by the bits of y -- no multiplier per
// candidate.  B(x) holds the remaining terms (x^3, x^5, x^6, x^7 ...) and is
// evaluated Chien-style: one register per term and lane, multiplied each
// clock by the constant alpha^(j PAR).  alpha^i is a root where A = B.
//
// Candidates i = 1..N are tested, PAR per clock.  A root alpha^i marks an
// error at bit position (N - i) mod N of the codeword (bit 0 = x^0).
//
// Interface and timing: start (while idle) loads sigma; the table L and the
// lane registers are filled in that clock.  done pulses ceil(N/PAR)
// clocks after start, with err_vec and num_roots valid and held until the
// next start.  PAR is this design's choice.
module bch_brs_chien
  import bch_pkg::*;
#(
  parameter int unsigned    BCH_M = 6,
  parameter int unsigned    T     = 3,
  parameter logic [BCH_M:0] PRIM  = 7'b1000011,
  parameter int unsigned    PAR   = 7,
  localparam int unsigned   N     = (1 << BCH_M) - 1,
  localparam int unsigned   NRW   = $clog2(N + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [T:0][BCH_M-1:0]  sigma,
  output logic                   busy,
  output logic                   done,
  output logic [N-1:0]           err_vec,
  output logic [NRW-1:0]         num_roots
);
  localparam int unsigned STEPS = (N + PAR - 1) / PAR;
  localparam int unsigned SW    = $clog2(STEPS + 1);

  typedef logic [BCH_M-1:0] el_t;

  function automatic el_t mul(el_t x, el_t y);
    return BCH_M'(gf_mul(gf_t'(x), gf_t'(y), BCH_M, prim_t'(PRIM)));
  endfunction
  function automatic el_t apow(int unsigned e);
    return BCH_M'(gf_pow(e, BCH_M, prim_t'(PRIM)));
  endfunction

  el_t                   s0_q;                 // sigma_0
  el_t                   ltab_q [BCH_M];       // L(alpha^k), k = 0..BCH_M-1
  el_t                   y_q    [PAR];         // candidate alpha^i per lane
  el_t                   c_q    [PAR][T+1];    // sigma_j alpha^(j i), non-linear j only
  logic [SW-1:0]         step_q;
  logic                  run_q;
  logic [N-1:0]          ev_q;
  logic [NRW-1:0]        nr_q;

  // Affine-part table: L(alpha^k) = sum over linearised j of sigma_j alpha^(j k).
  el_t ltab_n [BCH_M];
  always_comb begin
    for (int k = 0; k < BCH_M; k++) begin
      ltab_n[k] = '0;
      for (int j = 1; j <= T; j++)
        if (is_pow2(j)) ltab_n[k] ^= mul(sigma[j], apow(j * k));
    end
  end

  // Per-lane evaluation and root detection for the current step.
  logic [PAR-1:0]   hit;
  logic [NRW-1:0]   pos [PAR];   // codeword bit tested by each lane
  always_comb begin
    for (int p = 0; p < PAR; p++) begin
      el_t av, bv;
      int  idx;
      av = s0_q;
      for (int k = 0; k < BCH_M; k++) if (y_q[p][k]) av ^= ltab_q[k];
      bv = '0;
      for (int j = 2; j <= T; j++) if (!is_pow2(j)) bv ^= c_q[p][j];
      idx    = 1 + int'(step_q) * PAR + p;
      pos[p] = NRW'((N - idx) % N);
      hit[p] = run_q && (idx <= N) && (av == bv);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s0_q   <= '0;
      step_q <= '0;
      run_q  <= 1'b0;
      ev_q   <= '0;
      nr_q   <= '0;
      done   <= 1'b0;
      for (int k = 0; k < BCH_M; k++) ltab_q[k] <= '0;
      for (int p = 0; p < PAR; p++) begin
        y_q[p] <= '0;
        for (int j = 0; j <= T; j++) c_q[p][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (run_q) begin
        for (int p = 0; p < PAR; p++) begin
          if (hit[p]) ev_q[pos[p]] <= 1'b1;
          y_q[p] <= mul(y_q[p], apow(PAR));
          for (int j = 2; j <= T; j++)
            if (!is_pow2(j)) c_q[p][j] <= mul(c_q[p][j], apow(j * PAR));
        end
        nr_q   <= nr_q + NRW'($countones(hit));
        step_q <= step_q + 1'b1;
        if (int'(step_q) == STEPS - 1) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end else if (start) begin
        s0_q <= sigma[0];
        for (int k = 0; k < BCH_M; k++) ltab_q[k] <= ltab_n[k];
        for (int p = 0; p < PAR; p++) begin
          y_q[p] <= apow(1 + p);
          for (int j = 2; j <= T; j++)
            if (!is_pow2(j)) c_q[p][j] <= mul(sigma[j], apow(j * (1 + p)));
        end
        step_q <= '0;
        ev_q   <= '0;
        nr_q   <= '0;
        run_q  <= 1'b1;
      end
    end
  end

  assign err_vec   = ev_q;
  assign num_roots = nr_q;
  assign busy      = run_q;
endmodule
