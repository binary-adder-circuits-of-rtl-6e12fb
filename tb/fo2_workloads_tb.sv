// fo2_workloads_tb: the adder in the other configurations the construction
// is discussed with, each checked against wide integer addition:
//   * 512 bits without Brent-Kung steps (TAU = 0, R = K = 3): the fastest,
//     super-linear form compared with Kogge-Stone for 512 inputs;
//   * 32 bits with TAU = 0 and R = K = 3: inner adder of 512 columns,
//     padded (columns above 32 unused);
//   * 32 bits with TAU = 0, R = 2, K = 3: the smaller 64-column alternative
//     for the same width;
//   * 1024 bits with the derived TAU, R, K and NAND/NOT Brent-Kung gates.
// Operands: random, complementary with a few generates (long carries), and
// all-ones plus one.
module fo2_workloads_tb;
  int checks = 0, failures = 0;

  logic [511:0]  a1, b1; logic [512:0]  s1;
  logic [31:0]   a2, b2; logic [32:0]   s2, s3;
  logic [1023:0] a4, b4; logic [1024:0] s4;

  fo2_adder #(.N(512), .TAU(0), .R(3), .K(3)) d1 (.a(a1), .b(b1), .s(s1));
  fo2_adder #(.N(32),  .TAU(0), .R(3), .K(3)) d2 (.a(a2), .b(b2), .s(s2));
  fo2_adder #(.N(32),  .TAU(0), .R(2), .K(3)) d3 (.a(a2), .b(b2), .s(s3));
  fo2_adder #(.N(1024), .NAND_BK(1'b1))        d4 (.a(a4), .b(b4), .s(s4));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1023:0] ra, rb;
    for (int v = 0; v < 3000; v++) begin
      for (int i = 0; i < 32; i++) ra[32*i +: 32] = $urandom;
      case (v % 3)
        0: for (int i = 0; i < 32; i++) rb[32*i +: 32] = $urandom;
        1: begin
          rb = ~ra;
          for (int k = 0; k < 2; k++) begin
            int p;
            p = $urandom % 1024;
            ra[p] = 1'b1; rb[p] = 1'b1;
          end
        end
        default: begin ra = '1; rb = 1024'(1) << ($urandom % 4); end
      endcase
      a1 = 512'(ra); b1 = 512'(rb);
      a2 = 32'(ra >> 512); b2 = 32'(rb >> 512);
      if (v % 3 == 1) begin a2 = 32'(ra); b2 = 32'(rb); end
      a4 = ra; b4 = rb;
      #1;
      checks += 4;
      if (s1 !== {1'b0, a1} + {1'b0, b1}) begin failures++; if (failures < 5) $display("512 TAU=0 R=K=3 vector %0d", v); end
      if (s2 !== {1'b0, a2} + {1'b0, b2}) begin failures++; if (failures < 5) $display("32 R=K=3 vector %0d", v); end
      if (s3 !== {1'b0, a2} + {1'b0, b2}) begin failures++; if (failures < 5) $display("32 R=2 K=3 vector %0d", v); end
      if (s4 !== {1'b0, a4} + {1'b0, b4}) begin failures++; if (failures < 5) $display("1024 NAND vector %0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
