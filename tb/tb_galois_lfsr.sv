// tb_galois_lfsr: checks the Galois LFSR random source at widths 4, 9, 13 (default) and 16.
// After reset each must hold its seed, never show the all-zero word, visit every non-zero
// word exactly once and return to the seed after exactly 2^n - 1 clock cycles (one new word
// per cycle). The step rule is checked against an independent model of a right-shifting
// Galois register with the primitive polynomials x^4+x^3+1, x^9+x^5+1,
// x^13+x^4+x^3+x+1 and x^16+x^15+x^13+x^4+1.
module tb_galois_lfsr;
  logic clk = 0, rst_n = 0;
  logic [3:0]  r4;
  logic [8:0]  r9;
  logic [12:0] r13;
  logic [15:0] r16;
  int checks = 0, failures = 0;

  galois_lfsr #(.WIDTH(4))                 d4  (.clk(clk), .rst_n(rst_n), .rnd(r4));
  galois_lfsr #(.WIDTH(9), .SEED(9'h0AB))  d9  (.clk(clk), .rst_n(rst_n), .rnd(r9));
  galois_lfsr                              d13 (.clk(clk), .rst_n(rst_n), .rnd(r13));
  galois_lfsr #(.WIDTH(16), .SEED(16'hACE1)) d16 (.clk(clk), .rst_n(rst_n), .rnd(r16));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] step(input logic [31:0] s, input logic [31:0] mask);
    return s[0] ? ((s >> 1) ^ mask) : (s >> 1);
  endfunction

  bit seen[65536];

  task automatic check_width(input int n, input logic [31:0] mask, input logic [31:0] seed);
    logic [31:0] cur, prev;
    int period;
    foreach (seen[i]) seen[i] = 0;
    cur = (n == 4) ? 32'(r4) : (n == 9) ? 32'(r9) : (n == 13) ? 32'(r13) : 32'(r16);
    checks++;
    if (cur != seed) begin failures++; $display("width %0d: reset value %h", n, cur); end
    period = 0;
    do begin
      prev = cur;
      seen[prev[15:0]] = 1;
      @(posedge clk); #1;
      cur = (n == 4) ? 32'(r4) : (n == 9) ? 32'(r9) : (n == 13) ? 32'(r13) : 32'(r16);
      period++;
      checks++;
      if (cur != step(prev, mask) || cur == 0) begin
        failures++;
        if (failures < 10) $display("width %0d: step %h -> %h", n, prev, cur);
      end
      if (cur != seed && seen[cur[15:0]]) begin
        failures++;
        if (failures < 10) $display("width %0d: early repeat of %h", n, cur);
      end
    end while (cur != seed && period < (1 << n));
    checks++;
    if (period != (1 << n) - 1) begin
      failures++;
      $display("width %0d: period %0d, expected %0d", n, period, (1 << n) - 1);
    end
  endtask

  task automatic do_reset;
    rst_n = 0;
    @(posedge clk); @(posedge clk); #1;
    rst_n = 1;
  endtask

  initial begin
    do_reset(); check_width(4, 32'h0000_000C, 32'h1);
    do_reset(); check_width(9, 32'h0000_0110, 32'h0AB);
    do_reset(); check_width(13, 32'h0000_100D, 32'h1);
    do_reset(); check_width(16, 32'h0000_D008, 32'hACE1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
