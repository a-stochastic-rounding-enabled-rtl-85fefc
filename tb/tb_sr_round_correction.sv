// tb_sr_round_correction: exhaustive test of the second eager rounding stage. For all 256
// input combinations the carry must be that of R S + R1 R2 + S'1 (no left shift) or of
// R G + R1 R2 + S'2 (left shift by one), each a 2-bit sum plus a carry-in reaching 4.
module tb_sr_round_correction;
  logic r_bit, s_bit, g_bit, no_shift, c;
  logic [1:0] rnd_hi, s_prime;
  int checks = 0, failures = 0;
  logic clk = 0;

  sr_round_correction dut (.r_bit(r_bit), .s_bit(s_bit), .g_bit(g_bit), .rnd_hi(rnd_hi),
                           .s_prime(s_prime), .no_shift(no_shift), .c(c));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int low, total;
      {r_bit, s_bit, g_bit, rnd_hi, s_prime, no_shift} = 8'(v);
      #1;
      low   = no_shift ? int'(s_bit) : int'(g_bit);
      total = 2 * int'(r_bit) + low + int'(rnd_hi) + (no_shift ? int'(s_prime[1]) : int'(s_prime[0]));
      checks++;
      if (c !== (total >= 4)) begin
        failures++;
        $display("MISMATCH R=%b S=%b G=%b R1R2=%b S'=%b no_shift=%b got=%b", r_bit, s_bit,
                 g_bit, rnd_hi, s_prime, no_shift, c);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
