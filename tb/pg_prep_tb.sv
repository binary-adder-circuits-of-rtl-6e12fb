// pg_prep_tb: checks the propagate/generate preparation bit by bit.
// Random addends at the default width; for every bit the expected pair is
// worked out from the truth table of a half adder (x = sum bit, y = carry bit
// of a + b on that single position).
module pg_prep_tb;
  localparam int N = 4096;
  logic [N-1:0] a, b, x, y;
  int checks = 0, failures = 0;

  pg_prep #(.N(N)) dut (.a(a), .b(b), .x(x), .y(y));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 50; v++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = 1'($urandom);
        b[i] = 1'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        logic [1:0] half;
        half = {1'b0, a[i]} + {1'b0, b[i]};
        checks++;
        if (x[i] !== half[0] || y[i] !== half[1]) begin
          failures++;
          if (failures < 10) $display("bit %0d: a=%b b=%b x=%b y=%b", i, a[i], b[i], x[i], y[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
