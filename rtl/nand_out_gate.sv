// nand_out_gate: reduced output-correction gate of a Brent-Kung step in
// NAND/NOT form: yo = NAND( NOT yi, NAND(xi, yj) ) = yi OR (xi AND yj).
// It is nand_prefix_gate without the two propagate-path gates (two NANDs and
// one NOT, generate path of depth two) and replaces bk_out_gate when the NAND
// mapping is selected. Purely combinational.
module nand_out_gate (
  input  logic xi,
  input  logic yi,
  input  logic yj,
  output logic yo
);
  logic yi_n;
  logic b_n;
  assign yi_n = ~yi;            // NOT
  assign b_n  = ~(xi & yj);     // NAND
  assign yo   = ~(yi_n & b_n);  // NAND
endmodule
