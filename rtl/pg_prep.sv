// pg_prep: propagate/generate preparation of a binary adder.
//
// For every bit position the propagate signal x = a XOR b and the generate
// signal y = a AND b are formed; the carry network works on these pairs only.
// This is the standard preparation step of the construction (constant depth,
// one gate per output). Bit i of each vector is position i+1 counted from the
// least significant bit. Purely combinational.
module pg_prep #(
  parameter int N = 4096
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] x,
  output logic [N-1:0] y
);
  assign x = a ^ b;
  assign y = a & b;
endmodule
