// bk_out_gate: reduced output-correction gate of a refined Brent-Kung step.
//
// After a halving step the inner adder delivers the carries of the even
// positions only. The carry of the following odd position is
//   yo = yi OR (xi AND yj)
// where (xi, yi) is the odd position's own pair and yj the carry from the
// inner adder. Unlike a full prefix gate no group propagate is formed, so the
// odd position's propagate is used once here. Two gates (AND, OR), depth two.
module bk_out_gate (
  input  logic xi,
  input  logic yi,
  input  logic yj,
  output logic yo
);
  logic b_and;
  assign b_and = xi & yj;     // gate B
  assign yo    = yi | b_and;  // gate C
endmodule
