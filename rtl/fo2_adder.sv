// fo2_adder: N-bit binary adder of depth log2 N + o(log N), linear size and
// fan-out two.
//
// S = A + B with S one bit wider than the addends. The adder is the chain
//   pg_prep (x = a XOR b, y = a AND b)
//   -> bk_adder (TAU Brent-Kung halving steps around a multi-input
//      generate adder with radix 2^R and K rows on N/2^TAU positions)
//   -> sum_stage (s_i = c_i XOR x_i, top bit = carry-out).
// Default sizing follows the construction's rules (see adder_pkg): for
// N = 4096 it uses TAU = 8 and a 16-position inner adder with R = K = 2,
// giving at most log2 N + 8*ceil(sqrt(log2 N)) + 6*ceil(log2 ceil(sqrt(log2 N)))
// + 2 logic levels in the carry network and about 9.5 gates per bit.
// The width N = 4096 is this design's choice; the construction is stated for
// any N. NAND_BK = 1 selects NAND/NOT gates in the Brent-Kung steps (see
// bk_adder). There is no carry-in (c_1 = 0) and no register: the adder is
// purely combinational.
module fo2_adder #(
  parameter int N   = 4096,
  parameter int TAU = adder_pkg::tau_for(N),
  parameter int R   = adder_pkg::rk_for(N >> TAU),
  parameter int K   = R,
  parameter bit NAND_BK = 1'b0
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   s
);
  logic [N-1:0] x;
  logic [N-1:0] y;
  logic [N-1:0] c;

  pg_prep #(.N(N)) u_prep (.a(a), .b(b), .x(x), .y(y));

  bk_adder #(.N(N), .TAU(TAU), .R(R), .K(K), .NAND_BK(NAND_BK)) u_carry (.x(x), .y(y), .c(c));

  sum_stage #(.N(N)) u_sum (.x(x), .c(c), .s(s));
endmodule
