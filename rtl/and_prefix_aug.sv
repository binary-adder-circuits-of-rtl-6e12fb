// and_prefix_aug: augmented Kogge-Stone AND-prefix graph.
//
// For NP = 2^(R*K) propagate inputs it delivers, for every position t = 1..NP
// and every block l = 0..K-1, the group propagate
//   X_{s,t} = x_s AND ... AND x_t,   s = 1 + max(t - 2^(R*l), 0),
// that is, the AND over the 2^(R*l) positions ending at t (fewer at the low
// end). Each result is provided 2^R times, every copy through its own
// repeater, because each one feeds 2^R multi-input generate gates.
//
// Structure: a Kogge-Stone prefix graph with AND as the operator. Level i
// pairs column j with column j - 2^(i-1); columns with no partner hold a
// repeater. Before every block of R levels a row of NP repeaters is inserted:
// the signal just above that row (the inputs for l = 0, the result of level
// R*l otherwise) is tapped once for the output, and the repeater row feeds the
// next block, so every node drives at most two gates. Each tap enters a
// repeater tree of 2^(R+1)-1 repeaters (one root, then R doubling levels).
// The last R AND levels of a full Kogge-Stone graph are not needed and are
// left out; so is the repeater row in front of them, which would drive
// nothing. X for block l is ready after l*(R+1) gates plus R+1 repeaters.
//
// Output: xs[l][t-1][c] is copy c of X_{1+(t-2^(Rl))^+, t}. Combinational.
module and_prefix_aug #(
  parameter int R = 2,
  parameter int K = 2,
  localparam int NP = 2**(R*K),
  localparam int NC = 2**R
) (
  input  logic [NP-1:0]                   x,
  output logic [K-1:0][NP-1:0][NC-1:0]    xs
);
  for (genvar l = 0; l < K; l++) begin : g_blk
    // Signal tapped for block l: the inputs, or the last AND level of block l-1.
    logic [NP-1:0] tap;
    if (l == 0) begin : g_tap_in
      assign tap = x;
    end else begin : g_tap_lvl
      assign tap = g_blk[l-1].g_ks.g_lvl[R].p;
    end

    // Output repeater trees: root repeater (level 0), then R doubling
    // levels; repeater m of level d is fed by repeater m/2 of level d-1.
    for (genvar t = 0; t < NP; t++) begin : g_out
      for (genvar d = 0; d <= R; d++) begin : g_tree
        logic [2**d-1:0] q;
        if (d == 0) begin : g_root
          assign q[0] = tap[t];
        end else begin : g_dbl
          for (genvar m = 0; m < 2**d; m++) begin : g_rep
            assign q[m] = g_tree[d-1].q[m/2];
          end
        end
      end
      assign xs[l][t] = g_tree[R].q;
    end

    // Row of repeaters, then R Kogge-Stone AND levels
    // (global levels R*l+1 .. R*l+R). Absent after the last tap.
    if (l < K - 1) begin : g_ks
      logic [NP-1:0] rep;
      assign rep = tap;
      for (genvar i = 0; i <= R; i++) begin : g_lvl
        logic [NP-1:0] p;
        if (i == 0) begin : g_in
          assign p = rep;
        end else begin : g_and
          localparam int D = 2**(R*l + i - 1);
          for (genvar j = 0; j < NP; j++) begin : g_col
            if (j >= D) begin : g_gate
              assign p[j] = g_lvl[i-1].p[j] & g_lvl[i-1].p[j-D];
            end else begin : g_rep
              assign p[j] = g_lvl[i-1].p[j];
            end
          end
        end
      end
    end
  end
endmodule
