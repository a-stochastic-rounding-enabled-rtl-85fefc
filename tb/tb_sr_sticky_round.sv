// tb_sr_sticky_round: exhaustive test of the first eager rounding stage for r = 13 (default)
// and r = 4. S'1 must be the carry out of the (r-2)-bit sum of the aligned bits and the random
// bits, S'2 the carry out of their low r-3 bits, both computed here with plain integers.
module tb_sr_sticky_round;
  logic [10:0] g13, q13;
  logic [1:0]  g4, q4, sp13, sp4;
  int checks = 0, failures = 0;
  logic clk = 0;

  sr_sticky_round dut13 (.grp(g13), .rnd_lo(q13), .s_prime(sp13));
  sr_sticky_round #(.R_BITS(4)) dut4 (.grp(g4), .rnd_lo(q4), .s_prime(sp4));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048; i++) begin
      for (int j = 0; j < 2048; j++) begin
        logic [1:0] e13;
        g13 = 11'(i); q13 = 11'(j);
        g4 = 2'(i); q4 = 2'(j);
        #1;
        e13 = {(i + j) >= 2048, ((i % 1024) + (j % 1024)) >= 1024};
        checks++;
        if (sp13 !== e13) begin
          failures++;
          if (failures < 10) $display("r=13 grp=%h rnd=%h got=%b exp=%b", g13, q13, sp13, e13);
        end
        if (i < 4 && j < 4) begin
          logic [1:0] e4;
          e4 = {(i + j) >= 4, ((i % 2) + (j % 2)) >= 2};
          checks++;
          if (sp4 !== e4) begin
            failures++;
            if (failures < 10) $display("r=4 grp=%h rnd=%h got=%b exp=%b", g4, q4, sp4, e4);
          end
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
