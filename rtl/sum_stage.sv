// sum_stage: final sum of a binary adder from its carries.
//
// s_1 = x_1 (the carry-in is 0), s_i = c_i XOR x_i for i = 2..N, and the
// carry-out c_{N+1} becomes the top sum bit. Port c holds the carries that
// the carry network produces: c[i] is the carry INTO position i+2, i.e. out
// of position i+1. The zero carry-in follows the construction's usual
// convention. Purely combinational, one XOR level.
module sum_stage #(
  parameter int N = 4096
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] c,
  output logic [N:0]   s
);
  assign s[0] = x[0];
  for (genvar i = 1; i < N; i++) begin : g_bit
    assign s[i] = x[i] ^ c[i-1];
  end
  assign s[N] = c[N-1];
endmodule
