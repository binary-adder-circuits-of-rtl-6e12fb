// bk_adder: carry network of the linear-size, fan-out-two adder.
//
// Computes all N carries from the (propagate, generate) pairs. TAU refined
// Brent-Kung steps wrap an inner multi-input generate adder (mig_adder):
//  * halving: prefix gates combine positions (2i+2, 2i+1) into one pair, so
//    the inner problem has N/2 positions;
//  * the inner network (the next halving level, or the mig_adder after TAU
//    levels) returns the carries out of every even position;
//  * correction: each even carry is passed on through a repeater and also
//    feeds a reduced output gate (bk_out_gate) that forms the carry out of
//    the next odd position from that position's own pair. The carry out of
//    position 1 is y_1.
// Only the generate part of the inner result is needed, which is why the
// inner adder can be one that produces no group propagates. Every step adds
// four logic levels and about 5.5 gates per position of its width; the
// repeater per even carry keeps the fan-out at two even when the step is
// nested inside another.
// When TAU = 0 and N is smaller than 2^(R*K), the inner adder's extra high
// columns receive x = y = 0; they cannot influence the low carries and their
// outputs are left open (synthesis removes the columns).
//
// NAND_BK = 1 builds the halving and correction gates of the Brent-Kung
// steps from NAND and NOT gates (nand_prefix_gate, nand_out_gate) instead of
// AND/OR; the function and the depth of the steps are unchanged. The inner
// adder stays in AND/OR form in both cases.
//
// Port c: c[i] is the carry out of position i+1 (into position i+2).
// N must be divisible by 2^TAU. Combinational.
module bk_adder #(
  parameter int N   = 4096,
  parameter int TAU = adder_pkg::tau_for(N),
  parameter int R   = adder_pkg::rk_for(N >> TAU),
  parameter int K   = R,
  parameter bit NAND_BK = 1'b0
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  output logic [N-1:0] c
);
  // Level s = 0..TAU works on N >> s positions; level 0 is the ports.
  for (genvar s = 0; s <= TAU; s++) begin : g_lvl
    localparam int NS = N >> s;
    logic [NS-1:0] xl;
    logic [NS-1:0] yl;
    logic [NS-1:0] cl;

    if (s == 0) begin : g_ports
      assign xl = x;
      assign yl = y;
      assign c  = cl;
    end else begin : g_half
      // Halving: level s-1 pairs (2i+1, 2i), left = more significant.
      for (genvar i = 0; i < NS; i++) begin : g_pg
        if (NAND_BK) begin : g_nand
          nand_prefix_gate u_pg (
            .xi(g_lvl[s-1].xl[2*i+1]), .yi(g_lvl[s-1].yl[2*i+1]),
            .xj(g_lvl[s-1].xl[2*i]),   .yj(g_lvl[s-1].yl[2*i]),
            .xo(xl[i]),                .yo(yl[i])
          );
        end else begin : g_andor
          prefix_gate u_pg (
            .xi(g_lvl[s-1].xl[2*i+1]), .yi(g_lvl[s-1].yl[2*i+1]),
            .xj(g_lvl[s-1].xl[2*i]),   .yj(g_lvl[s-1].yl[2*i]),
            .xo(xl[i]),                .yo(yl[i])
          );
        end
      end
    end

    if (s == TAU) begin : g_inner
      localparam int NP = 2**(R*K);
      if (NP < NS) begin : g_bad
        $error("bk_adder: inner adder 2**(R*K) = %0d is narrower than N >> TAU = %0d", NP, NS);
      end
      if (NP == NS) begin : g_exact
        mig_adder #(.R(R), .K(K)) u_mig (.x(xl), .y(yl), .c(cl));
      end else begin : g_pad
        logic [NP-1:0] xp;
        logic [NP-1:0] yp;
        logic [NP-1:0] cp;
        assign xp = NP'(xl);
        assign yp = NP'(yl);
        mig_adder #(.R(R), .K(K)) u_mig (.x(xp), .y(yp), .c(cp));
        assign cl = cp[NS-1:0];
      end
    end else begin : g_corr
      // Correction from the carries of level s+1 (even positions here).
      assign cl[0] = yl[0];
      for (genvar i = 0; i < NS / 2; i++) begin : g_pos
        assign cl[2*i+1] = g_lvl[s+1].cl[i];  // repeater
        if (i > 0 && NAND_BK) begin : g_odd_nand
          nand_out_gate u_og (
            .xi(xl[2*i]), .yi(yl[2*i]), .yj(g_lvl[s+1].cl[i-1]), .yo(cl[2*i])
          );
        end else if (i > 0) begin : g_odd
          bk_out_gate u_og (
            .xi(xl[2*i]), .yi(yl[2*i]), .yj(g_lvl[s+1].cl[i-1]), .yo(cl[2*i])
          );
        end
      end
    end
  end
endmodule
