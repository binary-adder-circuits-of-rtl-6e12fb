// mig_gate: multi-input (2^R-input) generate gate with 2^(R-1) outputs.
//
// From 2^R (propagate, generate) pairs, pair j = 1..2^R (vector bit j-1, pair
// 2^R the most significant), it computes the group generate
//   Y = OR_j ( y_j AND x_{j+1} AND ... AND x_{2^R} )
// in disjunctive normal form, without the group propagate:
//   1. a Kogge-Stone AND-suffix graph (R levels; columns without a partner
//      are repeaters) forms every suffix product x_j AND ... AND x_{2^R};
//   2. one row of AND gates forms the minterms m_j = y_j AND suffix_{j+1};
//      the top minterm m_{2^R} = y_{2^R} passes through one repeater;
//   3. with DUP = 1, R rows of 2^(R-1) OR gates: row l forms each partial OR
//      M of 2^l consecutive minterms 2^(l-1) times, copy c from copy
//      (c mod 2^(l-2)) of its two halves, so that every OR output drives at
//      most two gates and the last row gives 2^(R-1) copies of Y;
//      with DUP = 0 (last row of the adder) a balanced tree of 2^R-1 OR gates
//      gives one output instead.
// Propagate inputs drive two gates, generate inputs one. Depth: 2R+1 from a
// propagate input, R+1 from a generate input. The structure follows the
// construction; the copy-to-gate assignment in step 3 is this design's
// choice. The product of all 2^R propagates (suffix of x_1) is formed as part
// of the regular suffix graph but feeds nothing, so input x[0] is logically
// unused. Combinational.
module mig_gate #(
  parameter int R   = 2,
  parameter bit DUP = 1'b1,
  localparam int W    = 2**R,
  localparam int NOUT = DUP ? 2**(R-1) : 1
) (
  input  logic [W-1:0]    x,
  input  logic [W-1:0]    y,
  output logic [NOUT-1:0] g
);
  // ---- 1. Kogge-Stone AND-suffix graph -------------------------------------
  for (genvar i = 0; i <= R; i++) begin : g_sfx
    logic [W-1:0] s;
    if (i == 0) begin : g_in
      assign s = x;
    end else begin : g_and
      for (genvar j = 0; j < W; j++) begin : g_col
        if (j + 2**(i-1) < W) begin : g_gate
          assign s[j] = g_sfx[i-1].s[j] & g_sfx[i-1].s[j + 2**(i-1)];
        end else begin : g_rep
          assign s[j] = g_sfx[i-1].s[j];
        end
      end
    end
  end

  // ---- 2. minterms ---------------------------------------------------------
  logic [W-1:0] m;
  for (genvar j = 0; j < W - 1; j++) begin : g_min
    assign m[j] = y[j] & g_sfx[R].s[j+1];
  end
  assign m[W-1] = y[W-1];  // repeater

  // ---- 3. disjunction ------------------------------------------------------
  if (DUP) begin : g_dup
    // Row l holds 2^(R-l) partial ORs with 2^(l-1) copies each; entry
    // k*2^(l-1)+c is copy c of M over minterms k*2^l+1 .. (k+1)*2^l.
    for (genvar l = 1; l <= R; l++) begin : g_drow
      logic [2**(R-1)-1:0] q;
      for (genvar k = 0; k < 2**(R-l); k++) begin : g_sig
        for (genvar c = 0; c < 2**(l-1); c++) begin : g_cpy
          if (l == 1) begin : g_first
            assign q[k] = m[2*k] | m[2*k+1];
          end else begin : g_next
            assign q[k*2**(l-1) + c] =
                g_drow[l-1].q[(2*k)   * 2**(l-2) + (c % 2**(l-2))] |
                g_drow[l-1].q[(2*k+1) * 2**(l-2) + (c % 2**(l-2))];
          end
        end
      end
    end
    assign g = g_drow[R].q;
  end else begin : g_tree
    for (genvar l = 0; l <= R; l++) begin : g_trow
      logic [2**(R-l)-1:0] q;
      if (l == 0) begin : g_in
        assign q = m;
      end else begin : g_or
        for (genvar k = 0; k < 2**(R-l); k++) begin : g_gate
          assign q[k] = g_trow[l-1].q[2*k] | g_trow[l-1].q[2*k+1];
        end
      end
    end
    assign g = g_trow[R].q;
  end
endmodule
