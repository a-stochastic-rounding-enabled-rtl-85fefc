// fp_mul_exact: exact floating-point multiplier, FP8 E5M2 x FP8 E5M2 -> FP12 E6M5.
//
// The product of two p_m-bit significands fits exactly in p_a = 2*p_m bits, and the product
// exponent fits in E_a = E_m + 1 bits, so no rounding is needed: the result is the exact
// product, as the design specifies. The significand product lies in [1,4); when it is >= 2
// the exponent is incremented and the top bit becomes the implicit one, otherwise the product
// is shifted left by one. With biases 2^(E-1)-1 the output biased exponent is
// ex + ey + 1 + (product >= 2), always in the normal range 3..2^E_a-2.
//
// Special values (this implementation's choice, following IEEE-754 practice): an input with
// exponent field zero is a signed zero (no subnormal support, subnormal inputs are flushed);
// exponent all ones is Inf (fraction 0) or NaN. 0*Inf and NaN inputs give the quiet NaN
// (exponent all ones, fraction MSB set); Inf*finite gives a signed Inf.
//
// Purely combinational: z is valid in the same cycle as a and b.
module fp_mul_exact
  import sr_mac_pkg::*;
#(
  parameter int unsigned EXP_W = MUL_EXP_W,   // E_m
  parameter int unsigned MAN_W = MUL_MAN_W,   // p_m - 1
  localparam int unsigned IN_W   = 1 + EXP_W + MAN_W,
  localparam int unsigned OEXP_W = EXP_W + 1,               // E_a
  localparam int unsigned OMAN_W = 2 * (MAN_W + 1) - 1,     // p_a - 1
  localparam int unsigned OUT_W  = 1 + OEXP_W + OMAN_W
) (
  input  logic [IN_W-1:0]  a,
  input  logic [IN_W-1:0]  b,
  output logic [OUT_W-1:0] z
);

  localparam int unsigned PM = MAN_W + 1;       // p_m
  localparam int unsigned PA = 2 * PM;          // p_a

  logic             sa, sb, sz;
  logic [EXP_W-1:0] ea, eb;
  logic [MAN_W-1:0] fa, fb;
  logic             a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [PA-1:0]    prod;
  logic [OEXP_W-1:0] ez;
  logic [OMAN_W-1:0] fz;

  always_comb begin
    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    sz     = sa ^ sb;
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_inf  = (ea == '1) && (fa == '0);
    b_inf  = (eb == '1) && (fb == '0);
    a_nan  = (ea == '1) && (fa != '0);
    b_nan  = (eb == '1) && (fb != '0);

    prod = PA'({1'b1, fa}) * PA'({1'b1, fb});
    if (prod[PA-1]) begin
      fz = prod[PA-2:0];
      ez = OEXP_W'(ea) + OEXP_W'(eb) + OEXP_W'(2);
    end else begin
      fz = {prod[PA-3:0], 1'b0};
      ez = OEXP_W'(ea) + OEXP_W'(eb) + OEXP_W'(1);
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      z = {1'b0, {OEXP_W{1'b1}}, 1'b1, {(OMAN_W-1){1'b0}}};
    else if (a_inf || b_inf)
      z = {sz, {OEXP_W{1'b1}}, {OMAN_W{1'b0}}};
    else if (a_zero || b_zero)
      z = {sz, {OEXP_W{1'b0}}, {OMAN_W{1'b0}}};
    else
      z = {sz, ez, fz};
  end

endmodule
