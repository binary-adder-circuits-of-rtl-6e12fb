// and_prefix_aug_tb: checks every copy of every group propagate of the
// augmented AND-prefix graph against a direct AND over the span
// max(1, t-2^(R*l)+1) .. t. Configurations R=K=2 (16 inputs), R=1,K=3
// (8 inputs) and R=2,K=3 (64 inputs). Inputs are random with a bias towards
// ones so that long spans are sometimes all-one; the all-ones and
// single-zero vectors are applied too.
module and_prefix_aug_tb;
  int checks = 0, failures = 0;

  logic [15:0] xa; logic [1:0][15:0][3:0] xsa;
  logic [7:0]  xb; logic [2:0][7:0][1:0]  xsb;
  logic [63:0] xc; logic [2:0][63:0][3:0] xsc;

  and_prefix_aug #(.R(2), .K(2)) da (.x(xa), .xs(xsa));
  and_prefix_aug #(.R(1), .K(3)) db (.x(xb), .xs(xsb));
  and_prefix_aug #(.R(2), .K(3)) dc (.x(xc), .xs(xsc));

  function automatic logic span_and(logic [63:0] x, int t, int len);
    logic v;
    v = 1'b1;
    for (int p = t; p > t - len && p >= 1; p--) v &= x[p-1];
    return v;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ones_seen = 0;

  initial begin
    for (int v = 0; v < 3000; v++) begin
      logic [63:0] r;
      for (int i = 0; i < 64; i++) r[i] = ($urandom % 16) != 0;
      if (v == 0) r = '1;
      if (v >= 1 && v <= 64) r = ~(64'(1) << (v - 1));
      xa = r[15:0]; xb = r[7:0]; xc = r;
      #1;
      for (int l = 0; l < 2; l++)
        for (int t = 1; t <= 16; t++)
          for (int c = 0; c < 4; c++) begin
            checks++;
            if (xsa[l][t-1][c] !== span_and({48'b0, xa}, t, 4**l)) failures++;
          end
      for (int l = 0; l < 3; l++)
        for (int t = 1; t <= 8; t++)
          for (int c = 0; c < 2; c++) begin
            checks++;
            if (xsb[l][t-1][c] !== span_and({56'b0, xb}, t, 2**l)) failures++;
          end
      for (int l = 0; l < 3; l++)
        for (int t = 1; t <= 64; t++)
          for (int c = 0; c < 4; c++) begin
            logic e;
            e = span_and(xc, t, 4**l);
            if (l == 2 && e) ones_seen++;
            checks++;
            if (xsc[l][t-1][c] !== e) begin
              failures++;
              if (failures < 10) $display("R2K3 l=%0d t=%0d c=%0d got %b", l, t, c, xsc[l][t-1][c]);
            end
          end
    end
    // The widest spans must have been exercised with a true result.
    checks++;
    if (ones_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
