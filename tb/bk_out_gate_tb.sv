// bk_out_gate_tb: exhaustive check of the reduced output-correction gate.
// The carry out of an odd position is the carry out of a one-bit ripple
// stage whose carry-in is the inner adder's carry yj.
module bk_out_gate_tb;
  logic xi, yi, yj, yo;
  int checks = 0, failures = 0;

  bk_out_gate dut (.xi(xi), .yi(yi), .yj(yj), .yo(yo));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      logic exp;
      {xi, yi, yj} = 3'(v);
      #1;
      // One-bit stage: generate wins, else propagate the incoming carry.
      exp = yi ? 1'b1 : (xi ? yj : 1'b0);
      checks++;
      if (yo !== exp) begin
        failures++;
        $display("x_i=%b y_i=%b y_j=%b -> %b", xi, yi, yj, yo);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
