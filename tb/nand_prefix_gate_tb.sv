// nand_prefix_gate_tb: exhaustive check of the NAND/NOT prefix gate and of
// its reduced output form against the carry-ripple meaning of the prefix
// operator: the left position generates, or propagates a carry generated by
// the right one; the pair propagates if both positions do.
module nand_prefix_gate_tb;
  logic xi, yi, xj, yj, xo, yo, yo_r;
  int checks = 0, failures = 0;

  nand_prefix_gate dut  (.xi(xi), .yi(yi), .xj(xj), .yj(yj), .xo(xo), .yo(yo));
  nand_out_gate    dutr (.xi(xi), .yi(yi), .yj(yj), .yo(yo_r));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic exp_y, exp_x;
      {xi, yi, xj, yj} = 4'(v);
      #1;
      exp_y = yi ? 1'b1 : (xi ? yj : 1'b0);
      exp_x = (xi && xj) ? 1'b1 : 1'b0;
      checks += 3;
      if (yo !== exp_y)   begin failures++; $display("yo %b%b%b%b -> %b", xi, yi, xj, yj, yo); end
      if (xo !== exp_x)   begin failures++; $display("xo %b%b%b%b -> %b", xi, yi, xj, yj, xo); end
      if (yo_r !== exp_y) begin failures++; $display("reduced %b%b%b -> %b", xi, yi, yj, yo_r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
