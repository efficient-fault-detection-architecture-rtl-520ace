// gf2m_serial_mult -- sequential polynomial-basis multiplier over GF(2^M),
// MSB-first interleaved reduction, built from NAND-only G and H modules.
//
// Computes C(x) = A(x) B(x) mod f(x) by the Horner recursion
//   P(0) = 0,  P(k) = (x P(k-1) mod f) xor b_(M-k) A(x),   k = 1..M
// one step per clock: G forms x P mod f, H adds b_(M-k) A.  A is held in
// parallel, B is shifted out MSB first, C is read in parallel (serial-in,
// parallel-out).  The field polynomial f(x) = x^M + F_LOW is a parameter; the
// default x^45 + x^4 + x^3 + x + 1 is this design's choice.
//
// Interface and timing: when idle, a start pulse captures a and b.  busy is
// high for the next M clocks; done pulses in the clock after the last step,
// exactly M clocks after the start edge, and c then holds the product until
// the next start.  start is ignored while busy.  Synchronous active-low reset.
module gf2m_serial_mult #(
  parameter int unsigned  M     = 45,
  parameter logic [M-1:0] F_LOW = M'('h1B)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [M-1:0] c
);
  localparam int unsigned CW = $clog2(M + 1);

  logic [M-1:0]  a_q, b_q, p_q, g_out, h_out;
  logic [CW-1:0] cnt_q;

  gf_nand_g #(.M(M), .F_LOW(F_LOW)) u_g (.p(p_q), .q(g_out));
  gf_nand_h #(.M(M))                u_h (.q(g_out), .bi(b_q[M-1]), .a(a_q), .p(h_out));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      p_q   <= '0;
      cnt_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cnt_q != '0) begin
        p_q   <= h_out;
        b_q   <= b_q << 1;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) done <= 1'b1;
      end else if (start) begin
        a_q   <= a;
        b_q   <= b;
        p_q   <= '0;
        cnt_q <= CW'(M);
      end
    end
  end

  assign busy = (cnt_q != '0);
  assign c    = p_q;
endmodule
