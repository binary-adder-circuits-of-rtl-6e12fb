// mig_adder_tb: checks all carries of multi-input generate adders against a
// ripple-carry reference (c_{t+1} = y_t OR (x_t AND c_t), c_1 = 0).
// Configurations (R,K): (2,2) = 16 positions, exhaustive over all 2^16
// operand pairs with b = a-dependent patterns plus random; (1,3) = 8
// positions, exhaustive; (3,2) and (2,3) = 64 positions, random with long
// propagate runs. (x, y) are derived from real addends so x AND y = 0.
module mig_adder_tb;
  int checks = 0, failures = 0;
  int long_runs = 0;

  logic [15:0] xa, ya, ca;
  logic [7:0]  xb, yb, cb;
  logic [63:0] xc, yc, cc;
  logic [63:0] xd, yd, cd;

  mig_adder #(.R(2), .K(2)) da (.x(xa), .y(ya), .c(ca));
  mig_adder #(.R(1), .K(3)) db (.x(xb), .y(yb), .c(cb));
  mig_adder #(.R(3), .K(2)) dc (.x(xc), .y(yc), .c(cc));
  mig_adder #(.R(2), .K(3)) dd (.x(xd), .y(yd), .c(cd));

  function automatic logic [63:0] ripple(logic [63:0] x, logic [63:0] y, int w);
    logic [63:0] c;
    logic cy;
    c = '0;
    cy = 1'b0;
    for (int t = 0; t < w; t++) begin
      cy = y[t] | (x[t] & cy);
      c[t] = cy;
    end
    return c;
  endfunction

  task automatic cmp(string name, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", name, got, exp);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] a, b;
    // 16 positions: all a in 0..255 x b in 0..255 on the low byte pairs,
    // spread over the word by replication, plus random words.
    for (int v = 0; v < 65536; v++) begin
      a = {4{16'(v[7:0] * 257)}};
      b = {4{16'(v[15:8] * 257) ^ 16'h5a5a}};
      if (v % 3 == 0) begin a = {$urandom, $urandom}; b = ~a ^ (64'(1) << ($urandom % 64)); end
      if (v % 3 == 1) begin a = {$urandom, $urandom}; b = {$urandom, $urandom}; end
      xa = a[15:0] ^ b[15:0]; ya = a[15:0] & b[15:0];
      xb = 8'(v) ^ 8'(v >> 8); yb = 8'(v) & 8'(v >> 8);
      xc = a ^ b; yc = a & b;
      xd = a ^ b; yd = a & b;
      #1;
      cmp("R2K2", {48'b0, ca}, ripple({48'b0, xa}, {48'b0, ya}, 16));
      cmp("R1K3", {56'b0, cb}, ripple({56'b0, xb}, {56'b0, yb}, 8));
      cmp("R3K2", cc, ripple(xc, yc, 64));
      cmp("R2K3", cd, ripple(xd, yd, 64));
      if (&xc[62:1] && yc[0]) long_runs++;
    end
    // The carry chain over the full 64-position width must have occurred.
    checks++;
    if (long_runs == 0) failures++;
    $display("long carry chains: %0d", long_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
