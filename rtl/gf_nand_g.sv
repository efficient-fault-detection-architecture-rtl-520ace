// gf_nand_g -- module G of the sequential multiplier: P(x) * x mod f(x),
// written with two-input NAND gates only.
//
// Shifting P one place up leaves p_(m-1) x^m, which is replaced by
// p_(m-1) (f(x) - x^m).  Every output bit is therefore
//   q_j = p_(j-1) xor (p_(m-1) and f_j)      (p_(-1) = 0)
// The AND is two NANDs and the XOR is the four-NAND cell of
//   a xor b = (a NAND (a NAND b)) NAND ((a NAND b) NAND b)
// so each level is an array of M NAND gates, as in the multiplier this
// design follows.  f(x) is a constant; synthesis folds the f_j = 0 bits away.
// Purely combinational.
module gf_nand_g #(
  parameter int unsigned     M     = 45,
  parameter logic [M-1:0]    F_LOW = M'('h1B)   // f(x) without its x^M term
) (
  input  logic [M-1:0] p,
  output logic [M-1:0] q
);
  logic [M-1:0] shl, top, n_and, red, n1, n2, n3;

  assign shl   = {p[M-2:0], 1'b0};
  assign top   = {M{p[M-1]}};
  assign n_and = ~(top & F_LOW);     // level 1
  assign red   = ~(n_and & n_and);   // level 2: p_(m-1) and f_j
  assign n1    = ~(shl & red);       // level 3
  assign n2    = ~(shl & n1);        // level 4
  assign n3    = ~(n1 & red);        // level 4
  assign q     = ~(n2 & n3);         // level 5
endmodule
