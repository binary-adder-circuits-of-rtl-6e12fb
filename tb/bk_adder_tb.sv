// bk_adder_tb: checks the carries of the Brent-Kung-step carry network
// against a ripple-carry reference (c_{t+1} = y_t OR (x_t AND c_t)).
// Configurations (N, TAU, R, K):
//   (64, 3, 1, 3)   three halving steps around an exact 8-position inner adder
//   (64, 3, 2, 2)   inner adder of 16 columns padded from 8 positions
//   (256, 4, 2, 2)  four steps, exact 16-position inner adder (the default
//                   inner shape)
//   (32, 0, 2, 3)   no halving step, inner adder of 64 columns padded from 32
//   (128)           all sizes derived from N by the package rules
//   (64, 3, 1, 3)   as the first, with NAND/NOT gates in the halving steps
// Operands are random, with biased vectors that build long propagate runs.
module bk_adder_tb;
  int checks = 0, failures = 0;
  int odd_carries = 0, long_chains = 0;

  logic [63:0]  x1, y1, c1, x2, y2, c2;
  logic [255:0] x3, y3, c3;
  logic [31:0]  x4, y4, c4;
  logic [127:0] x5, y5, c5;
  logic [63:0]  c6;

  bk_adder #(.N(64),  .TAU(3), .R(1), .K(3)) d1 (.x(x1), .y(y1), .c(c1));
  bk_adder #(.N(64),  .TAU(3), .R(2), .K(2)) d2 (.x(x2), .y(y2), .c(c2));
  bk_adder #(.N(256), .TAU(4), .R(2), .K(2)) d3 (.x(x3), .y(y3), .c(c3));
  bk_adder #(.N(32),  .TAU(0), .R(2), .K(3)) d4 (.x(x4), .y(y4), .c(c4));
  bk_adder #(.N(128))                        d5 (.x(x5), .y(y5), .c(c5));
  bk_adder #(.N(64),  .TAU(3), .R(1), .K(3), .NAND_BK(1'b1)) d6 (.x(x1), .y(y1), .c(c6));

  function automatic logic [255:0] ripple(logic [255:0] x, logic [255:0] y, int w);
    logic [255:0] c;
    logic cy;
    c = '0;
    cy = 1'b0;
    for (int t = 0; t < w; t++) begin
      cy = y[t] | (x[t] & cy);
      c[t] = cy;
    end
    return c;
  endfunction

  task automatic cmp(string name, logic [255:0] got, logic [255:0] exp);
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
    logic [255:0] a, b, e3;
    for (int v = 0; v < 20000; v++) begin
      for (int i = 0; i < 8; i++) a[32*i +: 32] = $urandom;
      case (v % 4)
        0: for (int i = 0; i < 8; i++) b[32*i +: 32] = $urandom;
        1: b = ~a ^ (256'(1) << ($urandom % 256)) ^ (256'(1) << ($urandom % 256));
        2: begin b = ~a; b[$urandom % 8] = 1'b1; a[$urandom % 8] = 1'b1; end
        default: b = ~a & {8{$urandom}};
      endcase
      x1 = 64'(a ^ b); y1 = 64'(a & b);
      x2 = 64'(a ^ b); y2 = 64'(a & b);
      x3 = a ^ b;      y3 = a & b;
      x4 = 32'(a ^ b); y4 = 32'(a & b);
      x5 = 128'(a ^ b); y5 = 128'(a & b);
      #1;
      e3 = ripple(x3, y3, 256);
      cmp("N64 R1K3", {192'b0, c1}, ripple({192'b0, x1}, {192'b0, y1}, 64));
      cmp("N64 NAND", {192'b0, c6}, ripple({192'b0, x1}, {192'b0, y1}, 64));
      cmp("N64 pad",  {192'b0, c2}, ripple({192'b0, x2}, {192'b0, y2}, 64));
      cmp("N256",     c3, e3);
      cmp("N32 TAU0", {224'b0, c4}, ripple({224'b0, x4}, {224'b0, y4}, 32));
      cmp("N128 auto", {128'b0, c5}, ripple({128'b0, x5}, {128'b0, y5}, 128));
      for (int i = 2; i < 256; i += 2) if (e3[i] && !y3[i]) odd_carries++;
      if (e3[255] && !(|y3[254:128])) long_chains++;
    end
    // Corrected odd-position carries and chains across half the word occurred.
    checks += 2;
    if (odd_carries == 0) failures++;
    if (long_chains == 0) failures++;
    $display("propagated carries at odd positions: %0d, chains over >= 128 positions: %0d",
             odd_carries, long_chains);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
