// mig_gate_tb: exhaustive check of multi-input generate gates.
// Configurations: R = 1, 2, 3 with duplicated outputs and R = 2, 3 with the
// single-output OR tree. Every (x, y) input combination is applied and all
// output copies are compared with a ripple-carry reference: a carry started
// at 0 below pair 1 passes through pairs 1..2^R in order.
module mig_gate_tb;
  int checks = 0, failures = 0;

  logic [1:0] x1, y1;   logic [0:0] g1;
  logic [3:0] x2, y2;   logic [1:0] g2;   logic [0:0] g2t;
  logic [7:0] x3, y3;   logic [3:0] g3;   logic [0:0] g3t;

  mig_gate #(.R(1), .DUP(1'b1)) d1  (.x(x1), .y(y1), .g(g1));
  mig_gate #(.R(2), .DUP(1'b1)) d2  (.x(x2), .y(y2), .g(g2));
  mig_gate #(.R(2), .DUP(1'b0)) d2t (.x(x2), .y(y2), .g(g2t));
  mig_gate #(.R(3), .DUP(1'b1)) d3  (.x(x3), .y(y3), .g(g3));
  mig_gate #(.R(3), .DUP(1'b0)) d3t (.x(x3), .y(y3), .g(g3t));

  function automatic logic ripple(logic [7:0] x, logic [7:0] y, int w);
    logic cy;
    cy = 1'b0;
    for (int j = 0; j < w; j++) cy = y[j] | (x[j] & cy);
    return cy;
  endfunction

  task automatic check(string name, logic got_all_equal, logic got, logic exp);
    checks++;
    if (!got_all_equal || got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %b (copies equal %b) expected %b", name, got, got_all_equal, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2**16; v++) begin
      {x3, y3} = 16'(v);
      x2 = x3[3:0]; y2 = y3[3:0];
      x1 = x3[1:0]; y1 = y3[1:0];
      #1;
      check("R3", &g3 | ~|g3, g3[0], ripple(x3, y3, 8));
      check("R3 tree", 1'b1, g3t[0], ripple(x3, y3, 8));
      if (v[11:8] == 0 && v[3:0] == 0 || v < 256) begin
        check("R2", &g2 | ~|g2, g2[0], ripple({4'b0, x2}, {4'b0, y2}, 4));
        check("R2 tree", 1'b1, g2t[0], ripple({4'b0, x2}, {4'b0, y2}, 4));
        check("R1", 1'b1, g1[0], ripple({6'b0, x1}, {6'b0, y1}, 2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
