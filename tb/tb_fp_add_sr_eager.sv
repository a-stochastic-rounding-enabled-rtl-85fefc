// tb_fp_add_sr_eager: self-checking test of the eager stochastic-rounding adder.
//
// Three adders are checked side by side: r = 13 (default), r = 9 (p+3) and r = 4. Random
// operand pairs, biased towards close exponents and both effective operations, with random
// words are compared bit for bit against sr_ref_pkg::ref_add. Then, for a set of operand
// pairs, every one of the 2^r random words is applied to the r = 13 and r = 4 adders: the
// result must always be the truncated value or the next one up, and the number of round-ups
// must equal the discarded fraction scaled to r bits, i.e. exactly the stochastic-rounding
// probability. Each adder path and rounding case must occur at least once.
module tb_fp_add_sr_eager;
  import sr_ref_pkg::*;

  logic [11:0] x, y, z13, z9, z4;
  logic [12:0] rnd;
  int checks = 0, failures = 0, swept = 0;
  int hits[C_NUM];
  logic clk = 0;
  int cycles = 0;

  fp_add_sr_eager dut13 (.x(x), .y(y), .rnd(rnd), .z(z13));
  fp_add_sr_eager #(.R_BITS(9)) dut9 (.x(x), .y(y), .rnd(rnd[8:0]), .z(z9));
  fp_add_sr_eager #(.R_BITS(4)) dut4 (.x(x), .y(y), .rnd(rnd[3:0]), .z(z4));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [11:0] rand_operand(input logic [11:0] other, input bit near);
    logic [11:0] v;
    int e;
    v = 12'($urandom);
    if (near) begin
      e = int'(other[10:5]) + int'($urandom_range(0, 6)) - 3;
      if (e < 1) e = 1;
      if (e > 62) e = 62;
      v[10:5] = 6'(e);
    end else if (v[10:5] == 6'h3F && $urandom_range(0, 7) != 0) v[10:5] = 6'h3E;
    return v;
  endfunction

  task automatic check_one(input int r, input logic [11:0] got);
    cls_e c;
    longint fr;
    logic [11:0] tr, exp_z;
    exp_z = ref_add(x, y, 32'(rnd), r, c, fr, tr);
    checks++;
    if (got !== exp_z) begin
      failures++;
      if (failures < 20)
        $display("MISMATCH r=%0d x=%h y=%h rnd=%h got=%h exp=%h class=%s",
                 r, x, y, rnd, got, exp_z, c.name());
    end
    if (r == 13) hits[c]++;
  endtask

  task automatic exhaustive(input int r);
    cls_e c;
    longint fr;
    logic [11:0] tr, nxt, got;
    int ups;
    void'(ref_add(x, y, 32'd0, r, c, fr, tr));
    if (fr < 0) return;
    swept++;
    nxt = {tr[11], tr[10:0] + 11'd1};
    ups = 0;
    for (int k = 0; k < (1 << r); k++) begin
      rnd = 13'(k);
      #1;
      got = (r == 13) ? z13 : z4;
      if (got == nxt && got != tr) ups++;
      else if (got != tr) begin
        checks++; failures++;
        if (failures < 20) $display("OUT OF SET r=%0d x=%h y=%h rnd=%h got=%h", r, x, y, rnd, got);
      end
    end
    checks++;
    if (longint'(ups) != fr) begin
      failures++;
      if (failures < 20)
        $display("SR PROBABILITY r=%0d x=%h y=%h: %0d round-ups of %0d, expected %0d",
                 r, x, y, ups, 1 << r, fr);
    end
  endtask

  initial begin
    foreach (hits[i]) hits[i] = 0;
    x = '0; y = '0; rnd = '0;
    @(posedge clk);
    // directed: 1.0 + 1.0, 1.0 - 1.0, x + 0, Inf - Inf, largest + largest
    for (int i = 0; i < 5; i++) begin
      case (i)
        0: begin x = 12'h3E0; y = 12'h3E0; end
        1: begin x = 12'h3E0; y = 12'hBE0; end
        2: begin x = 12'h3E5; y = 12'h000; end
        3: begin x = 12'h7E0; y = 12'hFE0; end
        4: begin x = 12'h7DF; y = 12'h7DF; end
        default: ;
      endcase
      rnd = 13'($urandom);
      #1;
      check_one(13, z13); check_one(9, z9); check_one(4, z4);
    end
    // random
    for (int i = 0; i < 200_000; i++) begin
      bit near;
      near = ($urandom_range(0, 3) != 0);
      x = rand_operand(12'h0, 1'b0);
      y = rand_operand(x, near);
      if ($urandom_range(0, 1) == 1) begin logic [11:0] t; t = x; x = y; y = t; end
      rnd = 13'($urandom);
      #1;
      check_one(13, z13); check_one(9, z9); check_one(4, z4);
      if (i % 1000 == 0) @(posedge clk);
    end
    // exhaustive over the random word
    for (int i = 0; i < 120; i++) begin
      x = rand_operand(12'h0, 1'b0);
      x[10:5] = 6'($urandom_range(8, 50));
      y = rand_operand(x, 1'b1);
      if (i % 3 == 0) y[10:5] = x[10:5] - 6'($urandom_range(2, 12));
      exhaustive(13);
      exhaustive(4);
      @(posedge clk);
    end
    $display("%0d operand pairs swept over all random words", swept);
    checks++;
    if (swept < 150) begin failures++; $display("too few exhaustive sweeps"); end
    for (int i = 0; i < C_NUM; i++) begin
      cls_e c;
      c = cls_e'(i);
      $display("coverage %-16s %0d", c.name(), hits[i]);
      checks++;
      if (hits[i] == 0) begin failures++; $display("class %s never exercised", c.name()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
