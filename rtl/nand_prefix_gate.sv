// nand_prefix_gate: the two-input prefix operator built from NAND and NOT
// gates only, for libraries in which inverting gates are the fast ones.
//
//   yo = NAND( NOT yi, NAND(xi, yj) )   = yi OR (xi AND yj)
//   xo = NOT ( NAND(xi, xj) )           = xi AND xj
//
// Five gates: two on the generate path at depth two, NAND then NOT on the
// propagate path. It replaces prefix_gate in the halving part of a
// Brent-Kung step when the NAND mapping is selected; the function is the
// same. Purely combinational.
module nand_prefix_gate (
  input  logic xi,
  input  logic yi,
  input  logic xj,
  input  logic yj,
  output logic xo,
  output logic yo
);
  logic yi_n;
  logic b_n;
  logic a_n;
  assign yi_n = ~yi;            // NOT
  assign b_n  = ~(xi & yj);     // NAND
  assign yo   = ~(yi_n & b_n);  // NAND
  assign a_n  = ~(xi & xj);     // NAND
  assign xo   = ~a_n;           // NOT
endmodule
