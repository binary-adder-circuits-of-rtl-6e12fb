// mig_adder: multi-input generate adder for NP = 2^(R*K) positions.
//
// Computes every carry c_{t+1} = Y_{1,t} (t = 1..NP) from the propagate and
// generate pairs, with fan-out two throughout. It is a radix-2^R Kogge-Stone
// arrangement of multi-input generate gates:
//  * an augmented AND-prefix graph (and_prefix_aug) supplies the group
//    propagates X over spans of 2^(R*(l-1)) positions, 2^R copies each;
//  * every generate input y_t is copied 2^(R-1) times by a repeater tree of
//    depth R-1;
//  * row l = 1..K, column t, with B = 2^(R*(l-1)), computes the generate of
//    the 2^(R*l) positions ending at t (fewer at the low end) from 2^R
//    groups of B positions: group d = 0..2^R-1 ends at column t-d*B and
//    supplies its generate (row l-1, column t-d*B) and its propagate
//    (AND-prefix block l-1, column t-d*B). Group d = 0 is the most
//    significant and enters the gate as input 2^R-1; a group's generate
//    counts only if every more significant group propagates. If t > B this
//    is a mig_gate; otherwise the span is already complete and row l-1's
//    value is only copied by a repeater tree.
//    Rows below the last make 2^(R-1) copies of each result; each copy feeds
//    two gates (group d uses generate copy d/2 and propagate copy d). The
//    last row uses the single-output form and one repeater in copy-only
//    columns.
// Where group d would lie below position 1 (t-d*B < 1) the gate input is
// tied to x = 1, y = 0: the construction draws such gates with fewer inputs,
// and the constants leave the function unchanged (synthesis removes them).
// Depth K*R + 2R + K + 1 logic levels when generate inputs are assumed to
// arrive R+2 levels late, as in the construction's analysis. Combinational.
//
// Port c: c[t-1] = Y_{1,t}, the carry out of position t.
module mig_adder #(
  parameter int R = 2,
  parameter int K = 2,
  localparam int NP = 2**(R*K),
  localparam int W  = 2**R,
  localparam int NC = 2**(R-1)
) (
  input  logic [NP-1:0] x,
  input  logic [NP-1:0] y,
  output logic [NP-1:0] c
);
  logic [K-1:0][NP-1:0][W-1:0] xs;

  and_prefix_aug #(.R(R), .K(K)) u_and (.x(x), .xs(xs));

  // Rows 0..K-1: gc[t] holds the 2^(R-1) copies of row l's result in column
  // t (row 0: the generate inputs).
  for (genvar l = 0; l < K; l++) begin : g_row
    logic [NP-1:0][NC-1:0] gc;
    localparam int B = (l == 0) ? 1 : 2**(R*(l-1));

    for (genvar t = 0; t < NP; t++) begin : g_col
      if (l > 0 && t >= B) begin : g_gate
        logic [W-1:0] gx;
        logic [W-1:0] gy;
        // Gate input p (p = W-1 most significant) takes the group d = W-1-p
        // spans below column t.
        for (genvar p = 0; p < W; p++) begin : g_pin
          localparam int D = W - 1 - p;
          if (t - D*B >= 0) begin : g_src
            assign gx[p] = xs[l-1][t - D*B][D];
            assign gy[p] = g_row[l-1].gc[t - D*B][D/2];
          end else begin : g_pad
            assign gx[p] = 1'b1;
            assign gy[p] = 1'b0;
          end
        end
        mig_gate #(.R(R), .DUP(1'b1)) u_gate (.x(gx), .y(gy), .g(gc[t]));
      end

      // Repeater tree of depth R-1 for row 0 (generate inputs) and for
      // copy-only columns (span already complete): level d
      // holds 2^d repeaters, repeater m fed by repeater m/2 of level d-1.
      if (l == 0 || t < B) begin : g_dup
        logic din;
        if (l == 0) begin : g_from_y
          assign din = y[t];
        end else begin : g_from_row
          assign din = g_row[l-1].gc[t][0];
        end
        for (genvar d = 0; d < R; d++) begin : g_tree
          logic [2**d-1:0] q;
          if (d == 0) begin : g_root
            assign q[0] = din;
          end else begin : g_dbl
            for (genvar m = 0; m < 2**d; m++) begin : g_rep
              assign q[m] = g_tree[d-1].q[m/2];
            end
          end
        end
        assign gc[t] = g_tree[R-1].q;
      end
    end
  end

  // Row K: single-output gates, one repeater in copy-only columns.
  localparam int BK = 2**(R*(K-1));
  for (genvar t = 0; t < NP; t++) begin : g_last
    if (t >= BK) begin : g_gate
      logic [W-1:0] gx;
      logic [W-1:0] gy;
      for (genvar p = 0; p < W; p++) begin : g_pin
        localparam int D = W - 1 - p;
        if (t - D*BK >= 0) begin : g_src
          assign gx[p] = xs[K-1][t - D*BK][D];
          assign gy[p] = g_row[K-1].gc[t - D*BK][D/2];
        end else begin : g_pad
          assign gx[p] = 1'b1;
          assign gy[p] = 1'b0;
        end
      end
      mig_gate #(.R(R), .DUP(1'b0)) u_gate (.x(gx), .y(gy), .g(c[t]));
    end else begin : g_copy
      assign c[t] = g_row[K-1].gc[t][0];  // repeater
    end
  end
endmodule
