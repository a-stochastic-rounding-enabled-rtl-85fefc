// tb_fp_mul_exact: exhaustive test of the exact FP8 E5M2 x E5M2 -> FP12 E6M5 multiplier.
// All 65536 operand pairs are compared with sr_ref_pkg::ref_mul, and for finite non-zero
// products the FP12 value is also checked against the product of the two FP8 values computed
// as an exact integer ratio (the multiplier must be exact).
module tb_fp_mul_exact;
  import sr_ref_pkg::*;

  logic [7:0]  a, b;
  logic [11:0] z;
  int checks = 0, failures = 0;
  logic clk = 0;

  fp_mul_exact dut (.a(a), .b(b), .z(z));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exact: (32+fz) * 2^(ez-36) == (4+fa)(4+fb) * 2^(ea+eb-34), compared as integers
  function automatic bit exact_product(input logic [7:0] x, input logic [7:0] y,
                                       input logic [11:0] p);
    logic [127:0] lhs, rhs;
    if (p[11] != (x[7] ^ y[7])) return 0;
    lhs = 128'(32 + int'(p[4:0])) << int'(p[10:5]);
    rhs = 128'((4 + int'(x[1:0])) * (4 + int'(y[1:0]))) << (int'(x[6:2]) + int'(y[6:2]) + 2);
    return lhs == rhs;
  endfunction

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a = 8'(i); b = 8'(j);
        #1;
        checks++;
        if (z !== ref_mul(a, b)) begin
          failures++;
          if (failures < 10) $display("MISMATCH a=%h b=%h got=%h exp=%h", a, b, z, ref_mul(a, b));
        end
        if (a[6:2] != 0 && a[6:2] != 31 && b[6:2] != 0 && b[6:2] != 31) begin
          checks++;
          if (!exact_product(a, b, z)) begin
            failures++;
            if (failures < 10) $display("INEXACT a=%h b=%h got=%h", a, b, z);
          end
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
