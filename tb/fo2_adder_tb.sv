// fo2_adder_tb: end-to-end test of the complete adder at its default size
// (N = 4096, derived TAU = 8, R = K = 2; no parameter is overridden).
// Each vector's sum is compared with the simulator's own wide integer
// addition. Operand patterns: random; complementary operands with a few
// generate bits so that carries ripple over long distances; all-ones plus
// one. The test also counts how often each mechanism of the carry network
// was needed and fails if one never was:
//   * carry corrected at an odd position by a Brent-Kung output gate
//   * carry that travels further than 2^TAU positions, i.e. through the
//     inner multi-input generate adder
//   * carry that travels further than 2^(TAU + R*(K-1)) positions, i.e. needs
//     a multi-input generate gate of the inner adder's last row
//   * carry-out of the whole word, and a carry over the full word.
module fo2_adder_tb;
  localparam int N   = 4096;
  localparam int TAU = adder_pkg::tau_for(N);
  localparam int R   = adder_pkg::rk_for(N >> TAU);
  localparam int K   = R;
  localparam int NV  = 2000;

  logic [N-1:0] a, b;
  logic [N:0]   s, ref_s;
  int checks = 0, failures = 0;
  int n_odd = 0, n_inner = 0, n_lastrow = 0, n_cout = 0, n_full = 0;

  fo2_adder dut (.a(a), .b(b), .s(s));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $display("N=%0d TAU=%0d R=%0d K=%0d", N, TAU, R, K);
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < N / 32; i++) a[32*i +: 32] = $urandom;
      case (v % 4)
        0: for (int i = 0; i < N / 32; i++) b[32*i +: 32] = $urandom;
        1: begin  // long propagate runs broken by a few random generates
          b = ~a;
          for (int k = 0; k < 3; k++) begin
            int p;
            p = $urandom % N;
            a[p] = 1'b1; b[p] = 1'b1;
          end
        end
        2: begin  // one generate at a random point, propagate above it
          int p;
          p = $urandom % N;
          b = ~a;
          a[p] = 1'b1; b[p] = 1'b1;
        end
        default: begin
          b = ~a;
          if (v % 8 == 3) begin a = '1; b = N'(1); end
          else begin a[0] = 1'b1; b[0] = 1'b1; end
        end
      endcase
      #1;
      ref_s = {1'b0, a} + {1'b0, b};
      checks++;
      if (s !== ref_s) begin
        failures++;
        if (failures < 5) $display("vector %0d: sum mismatch", v);
      end
      // Mechanism counters, from the reference carries.
      begin
        logic [N:0] cin;      // cin[i] = carry into bit i
        int run, maxrun;
        cin = ref_s ^ {1'b0, a ^ b};
        run = 0; maxrun = 0;
        for (int i = 1; i <= N; i++) begin
          if (cin[i] && !(a[i-1] & b[i-1])) run++;
          else run = 0;
          if (run > maxrun) maxrun = run;
          // carry out of an odd position (bit 2k, k>0) that was propagated
          if (i >= 3 && i % 2 == 1 && cin[i] && !(a[i-1] & b[i-1])) n_odd++;
        end
        if (maxrun > 2**TAU) n_inner++;
        if (maxrun > 2**(TAU + R*(K-1))) n_lastrow++;
        if (ref_s[N]) n_cout++;
        if (maxrun >= N - 1) n_full++;
      end
    end
    $display("odd-position corrections=%0d through inner adder=%0d through last row=%0d carry-out=%0d full-width=%0d",
             n_odd, n_inner, n_lastrow, n_cout, n_full);
    checks += 5;
    if (n_odd == 0)     failures++;
    if (n_inner == 0)   failures++;
    if (n_lastrow == 0) failures++;
    if (n_cout == 0)    failures++;
    if (n_full == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
