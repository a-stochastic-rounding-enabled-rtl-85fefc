// tb_sr_mac: end-to-end test of the MAC at its default configuration (FP8 E5M2 inputs, FP12
// E6M5 accumulator, r = 13 random bits), cycle by cycle and bit for bit.
//
// The testbench keeps its own model: the 13-bit Galois LFSR (x^13+x^4+x^3+x+1, seed 1),
// sr_ref_pkg::ref_mul and ref_add, and the accumulator register. After every clock edge the
// accumulator must equal the model, which checks the one-MAC-per-cycle rate and the one-cycle
// latency from operands to accumulator. Phases:
//   1. random operands with random enable and clear, including Inf/NaN and zero encodings;
//   2. directed sequences that flush a tiny difference to zero and overflow to Inf;
//   3. a swamping workload: 4096 products 1.0 * 2^-4 accumulated from zero (exact sum 256).
//      Round-down (truncation) stalls at 4 -- once the product falls below the FP12 spacing,
//      as a model run with a zero random word shows -- while stochastic rounding must end
//      within a factor of two of 256.
// Every adder path and rounding case, clear, hold, round-up and round-down must occur.
module tb_sr_mac;
  import sr_ref_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0]  a = '0, b = '0;
  logic [11:0] acc;
  int checks = 0, failures = 0;

  sr_mac dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .a(a), .b(b), .acc(acc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef enum int {M_CLEAR, M_HOLD, M_ROUND_UP, M_ROUND_DOWN, M_MUL_SPECIAL, M_SWAMP_AVOIDED,
                    M_NUM} mech_e;
  int cls_hits[C_NUM];
  int mech_hits[M_NUM];

  logic [12:0] lfsr;
  logic [11:0] model;

  function automatic logic [12:0] lfsr_step(input logic [12:0] s);
    return s[0] ? ((s >> 1) ^ 13'h100D) : (s >> 1);
  endfunction

  // Apply one cycle: operands and controls are set after an edge, the model advances on the
  // next edge, and the accumulator is compared right after it.
  task automatic cycle(input logic c_clr, input logic c_en, input logic [7:0] c_a,
                       input logic [7:0] c_b);
    cls_e c;
    longint fr;
    logic [11:0] tr, p, nxt;
    clr = c_clr; en = c_en; a = c_a; b = c_b;
    p = ref_mul(c_a, c_b);
    nxt = ref_add(p, model, 32'(lfsr), 13, c, fr, tr);
    @(posedge clk);
    if (c_clr) begin
      model = '0; mech_hits[M_CLEAR]++;
    end else if (c_en) begin
      model = nxt;
      cls_hits[c]++;
      if (fr > 0) begin
        if (nxt == tr) mech_hits[M_ROUND_DOWN]++; else mech_hits[M_ROUND_UP]++;
      end
      if (p[10:5] == 6'h3F) mech_hits[M_MUL_SPECIAL]++;
    end else mech_hits[M_HOLD]++;
    lfsr = lfsr_step(lfsr);
    #1;
    checks++;
    if (acc !== model) begin
      failures++;
      if (failures < 10) $display("t=%0t a=%h b=%h: acc=%h expected %h", $time, c_a, c_b, acc, model);
    end
  endtask

  function automatic logic [7:0] rand_fp8();
    logic [7:0] v;
    v = 8'($urandom);
    if (v[6:2] == 5'h1F && $urandom_range(0, 15) != 0) v[6:2] = 5'h0F;
    if (v[6:2] == 5'h00 && $urandom_range(0, 3) != 0) v[6:2] = 5'h0E;
    return v;
  endfunction

  function automatic real fp12_val(input logic [11:0] v);
    real m, s;
    m = 1.0 + real'(v[4:0]) / 32.0;
    s = 1.0;
    for (int i = 0; i < int'(v[10:5]); i++) s = s * 2.0;
    return m * s / 2147483648.0;      // 2^31 = 2^bias
  endfunction

  initial begin
    logic [11:0] rz;
    real sr_val;
    foreach (cls_hits[i]) cls_hits[i] = 0;
    foreach (mech_hits[i]) mech_hits[i] = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1;
    lfsr  = 13'h1;
    model = '0;
    checks++;
    if (acc !== '0) begin failures++; $display("accumulator not cleared by reset"); end

    // 1. random traffic; operands kept in a band so that sums stay interesting
    for (int i = 0; i < 20_000; i++) begin
      logic [7:0] ra, rb;
      ra = rand_fp8(); rb = rand_fp8();
      if ($urandom_range(0, 3) != 0) begin
        ra[6:2] = 5'($urandom_range(12, 18));
        rb[6:2] = 5'($urandom_range(12, 18));
      end
      cycle($urandom_range(0, 99) == 0, $urandom_range(0, 9) != 0, ra, rb);
    end

    // 2a. flush: 1.0*1.5*2^-28 - 1.25*1.25*2^-28 = -2^-32, below the smallest normal 2^-30
    cycle(1, 0, 8'h00, 8'h00);
    cycle(0, 1, 8'h04, 8'h06);
    cycle(0, 1, 8'h05, 8'h85);
    checks++;
    if (acc[10:0] != 0) begin failures++; $display("flush to zero not seen: %h", acc); end
    // 2b. overflow: (1.75*2^15)^2 twice exceeds the largest FP12 value, then Inf - Inf = NaN
    cycle(1, 0, 8'h00, 8'h00);
    cycle(0, 1, 8'h7B, 8'h7B);
    cycle(0, 1, 8'h7B, 8'h7B);
    checks++;
    if (acc != 12'h7E0) begin failures++; $display("overflow to Inf not seen: %h", acc); end
    cycle(0, 1, 8'h7C, 8'hFC);
    checks++;
    if (acc != 12'h7F0) begin failures++; $display("Inf + (-Inf) did not give NaN: %h", acc); end

    // 3. swamping workload
    cycle(1, 0, 8'h00, 8'h00);
    rz = '0;
    for (int i = 0; i < 4096; i++) begin
      cls_e c;
      longint fr;
      logic [11:0] tr;
      rz = ref_add(ref_mul(8'h3C, 8'h2C), rz, 32'd0, 13, c, fr, tr);
      cycle(0, 1, 8'h3C, 8'h2C);
    end
    sr_val = fp12_val(acc);
    $display("swamping workload: exact 256, stochastic rounding %f, truncation %f",
             sr_val, fp12_val(rz));
    checks++;
    if (sr_val < 128.0 || sr_val > 512.0) begin
      failures++; $display("stochastic rounding did not track the sum");
    end else if (fp12_val(rz) < 16.0) mech_hits[M_SWAMP_AVOIDED]++;

    for (int i = 0; i < C_NUM; i++) begin
      cls_e c;
      c = cls_e'(i);
      $display("adder class %-16s %0d", c.name(), cls_hits[i]);
      checks++;
      if (cls_hits[i] == 0) begin failures++; $display("never exercised: %s", c.name()); end
    end
    for (int i = 0; i < M_NUM; i++) begin
      mech_e m;
      m = mech_e'(i);
      $display("mechanism   %-16s %0d", m.name(), mech_hits[i]);
      checks++;
      if (mech_hits[i] == 0) begin failures++; $display("never exercised: %s", m.name()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
