// tb_sr_gemm_tile: a GEMM tile of a small-CNN training step run through the MAC.
//
// The tile has the shape of a 3x3 convolution with 16 input and 16 output channels, as in
// the first stage of ResNet-20 on CIFAR-10: 16 output channels x 16 output pixels, each a dot
// product of length K = 3*3*16 = 144 of FP8 E5M2 weights (magnitudes about 2^-6..2^-2) and
// activations (about 2^-3..2^1), with random signs. Each dot product is a clear followed by
// 144 enabled cycles. Every accumulator value is checked bit for bit against the model (LFSR,
// exact product, stochastic-rounding adder), and the final sums are compared with the exact
// real-valued dot products: stochastic rounding must show a smaller mean signed error (bias)
// than truncation of the same FP12 accumulator, and a mean absolute error below 2% of the
// sum of the absolute products.
module tb_sr_gemm_tile;
  import sr_ref_pkg::*;

  localparam int K = 144, ROWS = 16, COLS = 16;

  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0]  a = '0, b = '0;
  logic [11:0] acc;
  int checks = 0, failures = 0;

  sr_mac dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .a(a), .b(b), .acc(acc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] w[ROWS][K];
  logic [7:0] x[K][COLS];
  logic [12:0] lfsr;
  logic [11:0] model;

  function automatic logic [12:0] lfsr_step(input logic [12:0] s);
    return s[0] ? ((s >> 1) ^ 13'h100D) : (s >> 1);
  endfunction

  function automatic real pow2(input int e);
    real v;
    v = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) v = v * 2.0;
    else for (int i = 0; i < -e; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real fp8_val(input logic [7:0] v);
    if (v[6:2] == 0) return 0.0;
    return (v[7] ? -1.0 : 1.0) * (1.0 + real'(v[1:0]) / 4.0) * pow2(int'(v[6:2]) - 15);
  endfunction

  function automatic real fp12_val(input logic [11:0] v);
    if (v[10:5] == 0) return 0.0;
    return (v[11] ? -1.0 : 1.0) * (1.0 + real'(v[4:0]) / 32.0) * pow2(int'(v[10:5]) - 31);
  endfunction

  function automatic logic [7:0] fp8(input int lo, input int hi);
    return {1'($urandom), 5'($urandom_range(lo + 15, hi + 15)), 2'($urandom)};
  endfunction

  task automatic step(input logic c_clr, input logic c_en, input logic [7:0] c_a,
                      input logic [7:0] c_b);
    cls_e c;
    longint fr;
    logic [11:0] tr;
    clr = c_clr; en = c_en; a = c_a; b = c_b;
    @(posedge clk);
    if (c_clr) model = '0;
    else if (c_en) model = ref_add(ref_mul(c_a, c_b), model, 32'(lfsr), 13, c, fr, tr);
    lfsr = lfsr_step(lfsr);
    #1;
    checks++;
    if (acc !== model) begin
      failures++;
      if (failures < 10) $display("t=%0t acc=%h expected %h", $time, acc, model);
    end
  endtask

  initial begin
    real exact, l1, sr_err, rz_err, sr_rel;
    logic [11:0] rz;
    sr_err = 0.0; rz_err = 0.0; sr_rel = 0.0;
    for (int i = 0; i < ROWS; i++) for (int k = 0; k < K; k++) w[i][k] = fp8(-6, -2);
    for (int k = 0; k < K; k++) for (int j = 0; j < COLS; j++) x[k][j] = fp8(-3, 1);
    repeat (2) @(posedge clk);
    #1;
    rst_n = 1;
    lfsr = 13'h1;
    model = '0;
    for (int i = 0; i < ROWS; i++) begin
      for (int j = 0; j < COLS; j++) begin
        cls_e c;
        longint fr;
        logic [11:0] tr;
        step(1, 0, 8'h00, 8'h00);
        exact = 0.0;
        l1 = 0.0;
        rz = '0;
        for (int k = 0; k < K; k++) begin
          step(0, 1, w[i][k], x[k][j]);
          exact = exact + fp8_val(w[i][k]) * fp8_val(x[k][j]);
          l1 = l1 + ((fp8_val(w[i][k]) * fp8_val(x[k][j]) < 0.0) ?
                     -fp8_val(w[i][k]) * fp8_val(x[k][j]) : fp8_val(w[i][k]) * fp8_val(x[k][j]));
          rz = ref_add(ref_mul(w[i][k], x[k][j]), rz, 32'd0, 13, c, fr, tr);
        end
        sr_err = sr_err + (fp12_val(acc) - exact);
        rz_err = rz_err + (fp12_val(rz) - exact);
        sr_rel = sr_rel + ((fp12_val(acc) > exact) ? fp12_val(acc) - exact
                                                   : exact - fp12_val(acc)) / l1;
      end
    end
    sr_err = sr_err / (ROWS * COLS);
    rz_err = rz_err / (ROWS * COLS);
    sr_rel = sr_rel / (ROWS * COLS);
    $display("GEMM tile %0dx%0dx%0d: mean signed error SR %g, truncation %g; mean |error| / sum|products| SR %g",
             ROWS, COLS, K, sr_err, rz_err, sr_rel);
    checks++;
    if ((sr_err < 0 ? -sr_err : sr_err) >= (rz_err < 0 ? -rz_err : rz_err)) begin
      failures++; $display("stochastic rounding not less biased than truncation");
    end
    checks++;
    if (sr_rel > 0.02) begin failures++; $display("relative error too large"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
