// sum_stage_tb: checks the sum stage against integer addition.
// Random addends are split into propagate bits and the true carries of
// a + b (taken from the integer sum: carry into bit i = sum_i XOR a_i XOR b_i);
// the stage must then rebuild exactly a + b, carry-out included.
module sum_stage_tb;
  localparam int N = 256;
  logic [N-1:0] a, b, x, c;
  logic [N:0]   s, ref_s;
  int checks = 0, failures = 0;

  sum_stage #(.N(N)) dut (.x(x), .c(c), .s(s));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2000; v++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = 1'($urandom);
        b[i] = (v % 4 == 0) ? ~a[i] ^ (($urandom % 64) == 0) : 1'($urandom);
      end
      if (v == 0) begin a = '1; b = N'(1); end
      ref_s = {1'b0, a} + {1'b0, b};
      x = a ^ b;
      // carry out of position i+1 = carry into bit i+1 of the integer sum
      for (int i = 0; i < N; i++) c[i] = ref_s[i+1] ^ ((i + 1 < N) ? (a[i+1] ^ b[i+1]) : 1'b0);
      #1;
      checks++;
      if (s !== ref_s) begin
        failures++;
        if (failures < 5) $display("vector %0d: s=%h expected %h", v, s, ref_s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
