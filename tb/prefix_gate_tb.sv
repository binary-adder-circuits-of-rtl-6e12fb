// prefix_gate_tb: exhaustive check of the two-input prefix operator.
// The expected group (propagate, generate) of two adjacent positions is
// obtained by rippling a carry through position j and then position i: the
// group generates when a carry leaves i with carry-in 0, and propagates when
// an incoming carry would pass both positions. All 16 input combinations.
module prefix_gate_tb;
  logic xi, yi, xj, yj, xo, yo;
  int checks = 0, failures = 0;

  prefix_gate dut (.xi(xi), .yi(yi), .xj(xj), .yj(yj), .xo(xo), .yo(yo));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic exp_y, exp_x, cj;
      {xi, yi, xj, yj} = 4'(v);
      #1;
      // Ripple through position j then position i with carry-in 0.
      cj    = yj;                 // carry out of j
      exp_y = yi | (xi & cj);     // carry out of i
      exp_x = xi & xj;            // carry-in would pass both positions
      checks++;
      if (xo !== exp_x || yo !== exp_y) begin
        failures++;
        $display("x_i=%b y_i=%b x_j=%b y_j=%b -> %b%b", xi, yi, xj, yj, xo, yo);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
