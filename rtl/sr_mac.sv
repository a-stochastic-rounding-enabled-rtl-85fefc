// sr_mac: multiply-accumulate unit with FP8 inputs, FP12 accumulation and stochastic rounding.
//
// Every cycle with en high, the unit computes acc <- SR(acc + a*b). The product of the two
// FP8 E5M2 operands is formed exactly as an FP12 E6M5 value (fp_mul_exact), added to the
// registered accumulator by the eager stochastic-rounding adder (fp_add_sr_eager), and the
// rounded sum is written back to the accumulator register (acc_register). A free-running
// r-bit Galois LFSR (galois_lfsr) supplies a fresh random word every cycle, independently of
// the operands. Only the adder rounds; the multiplier is exact.
//
// Interface: clk; rst_n (active low, synchronous) clears the accumulator and seeds the LFSR;
// clr starts a new dot product by loading +0 (it wins over en); en accepts one operand pair
// (a, b); acc is the accumulator output. Throughput one MAC per cycle; acc shows the sum
// including a pair one clock edge after that pair was presented with en high.
//
// The composition (multiplier, PRNG, adder, register in a feedback loop) follows the design;
// the en/clr controls and the reset behaviour are this implementation's choices.
module sr_mac
  import sr_mac_pkg::*;
#(
  parameter int unsigned R_BITS = RAND_W,
  parameter logic [R_BITS-1:0] SEED = R_BITS'(1),
  localparam int unsigned IN_W  = 1 + MUL_EXP_W + MUL_MAN_W,
  localparam int unsigned ACC_W = 1 + ACC_EXP_W + ACC_MAN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  input  logic [IN_W-1:0]  a,
  input  logic [IN_W-1:0]  b,
  output logic [ACC_W-1:0] acc
);

  logic [ACC_W-1:0]  prod, sum;
  logic [R_BITS-1:0] rnd;

  fp_mul_exact #(.EXP_W(MUL_EXP_W), .MAN_W(MUL_MAN_W)) u_mul (
    .a(a), .b(b), .z(prod)
  );

  galois_lfsr #(.WIDTH(R_BITS), .SEED(SEED)) u_prng (
    .clk(clk), .rst_n(rst_n), .rnd(rnd)
  );

  fp_add_sr_eager #(.EXP_W(ACC_EXP_W), .MAN_W(ACC_MAN_W), .R_BITS(R_BITS)) u_add (
    .x(prod), .y(acc), .rnd(rnd), .z(sum)
  );

  acc_register #(.WIDTH(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .d(sum), .q(acc)
  );

endmodule
