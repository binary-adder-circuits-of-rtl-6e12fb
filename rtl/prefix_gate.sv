// prefix_gate: the two-input prefix operator on (propagate, generate) pairs.
//
//   (xi, yi) o (xj, yj) = (xi AND xj, yi OR (xi AND yj))
//
// The left pair (i) is the more significant group, the right pair (j) the less
// significant one. It is built from three gates of depth two, as in the
// construction: gate A forms the group propagate, gate B the AND of the left
// propagate with the right generate and gate C the OR that yields the group
// generate. In the adder it pairs neighbouring positions in each Brent-Kung
// halving step. Purely combinational.
module prefix_gate (
  input  logic xi,
  input  logic yi,
  input  logic xj,
  input  logic yj,
  output logic xo,
  output logic yo
);
  logic b_and;
  assign xo    = xi & xj;     // gate A
  assign b_and = xi & yj;     // gate B
  assign yo    = yi | b_and;  // gate C
endmodule
