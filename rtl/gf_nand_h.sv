// gf_nand_h -- module H of the sequential multiplier: accumulates one
// partial product, P'(x) = Q(x) xor b_i A(x), with two-input NAND gates only
// (eq. (9) style).
//
//   t   = NAND(b_i, a_j), u = NAND(t, t)          -> b_i and a_j
//   out = (q NAND (q NAND u)) NAND ((q NAND u) NAND u)
// Each line is an array of M NAND gates.  Purely combinational.
module gf_nand_h #(
  parameter int unsigned M = 45
) (
  input  logic [M-1:0] q,
  input  logic         bi,
  input  logic [M-1:0] a,
  output logic [M-1:0] p
);
  logic [M-1:0] t, u, n1, n2, n3;

  assign t  = ~({M{bi}} & a);   // level 1
  assign u  = ~(t & t);         // level 2
  assign n1 = ~(q & u);         // level 3
  assign n2 = ~(q & n1);        // level 4
  assign n3 = ~(n1 & u);        // level 4
  assign p  = ~(n2 & n3);       // level 5
endmodule
