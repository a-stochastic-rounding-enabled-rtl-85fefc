// fp_add_sr_eager: floating-point adder with eager stochastic rounding (no subnormals).
//
// Adds two precision-p numbers (default FP12 E6M5, p = 6) and rounds the sum stochastically
// with r random bits (default 13): the sum is rounded up to the next representable value with
// a probability equal to its distance from the truncated value, measured on r bits.
//
// Datapath (one shared integer adder for both paths, as in the design's dual-path adder):
//   1. Exponent difference / swap: the larger magnitude becomes x (ex >= ey; on equal
//      exponents the larger significand), d = ex - ey, op = effective subtraction.
//   2. Shift: m_y is shifted right by d into a window of p+r positions (position 0 is the
//      carry, position 1 the implicit bit, p the LSB, then the guard bit G at p+2 for the
//      far path); bits below position p+r-1 are dropped. 2's complement on subtraction.
//   3. The p+2 upper window positions go to the integer adder with m_x; in parallel the r-2
//      lower ones (G first) go to the Sticky Round stage with r-2 random bits (S'1, S'2).
//   4. Far path (d >= 2): the adder carry selects between no shift (implicit bit = carry,
//      exponent + 1) and a 1-bit left shift; close path (d <= 1): leading-zero count and left
//      shift, exact, with S' forced to 0,0.
//   5. Round Correction turns R, S (or G), the two top random bits and S' into the carry c,
//      and the incrementer adds c to {exponent, fraction}.
// The eager result equals that of classic rounding after normalization (lazy SR) of the same
// truncated window, with the random word's bit r-3 unused and the low bits moved up by one
// when the far-path result is shifted left; each outcome therefore has exactly the SR
// probability for an r-bit uniform random word.
//
// Choices of this implementation, where the design is silent: for a far-path effective
// subtraction x is placed one position higher (at position 0) and y shifted by d-1, so the
// difference also leaves its leading one at position 0 or 1 and the same two rounding cases
// apply (this keeps one extra bit of y on that path); results whose exponent before rounding
// is below the minimum normal are flushed to a zero of the result sign; exponent overflow, also
// by rounding, gives Inf; NaN, Inf and zero operands follow IEEE-754 (x + 0 = x, x - x = +0,
// NaN as exponent all ones with fraction MSB set). Zero exponent fields read as zero.
//
// Purely combinational: z is valid in the same cycle as x, y and rnd.
module fp_add_sr_eager
  import sr_mac_pkg::*;
#(
  parameter int unsigned EXP_W  = ACC_EXP_W,
  parameter int unsigned MAN_W  = ACC_MAN_W,
  parameter int unsigned R_BITS = RAND_W,
  localparam int unsigned N = 1 + EXP_W + MAN_W
) (
  input  logic [N-1:0]      x,
  input  logic [N-1:0]      y,
  input  logic [R_BITS-1:0] rnd,
  output logic [N-1:0]      z
);

  localparam int unsigned P   = MAN_W + 1;       // precision
  localparam int unsigned W   = P + R_BITS;      // alignment window, positions 0..W-1
  localparam int unsigned G_W = R_BITS - 2;      // sticky-round group (positions p+2..)
  localparam int unsigned U   = P + 2;           // adder width (positions 0..p+1)
  localparam int unsigned EW  = EXP_W + 2;       // signed working exponent width
  localparam int unsigned LZW = $clog2(U + 1);

  // ---- unpack and classify ---------------------------------------------------------------
  logic             sx, sy, sa, sb;
  logic [EXP_W-1:0] ex, ey, ea, eb;
  logic [MAN_W-1:0] fx, fy, fa, fb;
  logic             x_nan, y_nan, x_inf, y_inf, a_zero, b_zero, swap;

  // ---- alignment and addition -------------------------------------------------------------
  logic [EXP_W-1:0] d, shamt;
  logic             op_sub, far, sub_far;
  logic [U-1:0]     xa;
  logic [W-1:0]     y_base, y_al, y_c;
  logic [U-1:0]     sum_u;
  logic [G_W-1:0]   grp;
  logic [1:0]       s_prime;

  // ---- normalization --------------------------------------------------------------------
  logic             lead0;
  logic [LZW-1:0]   lz;
  logic [U-1:0]     n_close;
  logic [MAN_W-1:0] frac_m;
  logic             r_m, s_m, no_shift;
  logic [1:0]       s_prime_m;
  logic signed [EW-1:0] e_m;
  logic             c;
  logic [EXP_W+MAN_W-1:0] rounded;

  always_comb begin
    {sx, ex, fx} = x;
    {sy, ey, fy} = y;
    x_nan = (ex == '1) && (fx != '0);
    y_nan = (ey == '1) && (fy != '0);
    x_inf = (ex == '1) && (fx == '0);
    y_inf = (ey == '1) && (fy == '0);

    swap = {ey, fy} > {ex, fx};
    {sa, ea, fa} = swap ? y : x;
    {sb, eb, fb} = swap ? x : y;
    a_zero = (ea == '0);
    b_zero = (eb == '0);

    op_sub  = sa ^ sb;
    d       = ea - eb;
    far     = (d >= EXP_W'(2));
    sub_far = op_sub && far;

    xa     = sub_far ? {1'b1, fa, 2'b00} : {2'b01, fa, 1'b0};   // m_x at position 0 or 1
    y_base = {2'b01, fb, {(W-P-1){1'b0}}};
    shamt  = sub_far ? d - EXP_W'(1) : d;
    y_al   = (32'(shamt) >= W) ? '0 : (y_base >> shamt);
    y_c    = op_sub ? (~y_al + W'(1)) : y_al;

    grp   = y_c[G_W-1:0];
    sum_u = xa + y_c[W-1:G_W];
  end

  sr_sticky_round #(.R_BITS(R_BITS)) u_sticky (
    .grp    (grp),
    .rnd_lo (rnd[G_W-1:0]),
    .s_prime(s_prime)
  );

  always_comb begin
    lead0 = sum_u[U-1];

    // leading-zero detector for the close path
    lz = LZW'(U);
    for (int i = 0; i < U; i++)
      if (sum_u[i]) lz = LZW'(U - 1 - i);
    n_close = sum_u << lz;

    if (far) begin
      if (lead0) begin                       // carry: no shift, exponent + 1
        frac_m = sum_u[P:2];
        r_m    = sum_u[1];
        s_m    = sum_u[0];
      end else begin                         // 1-bit left shift, LSB filled by G later
        frac_m = sum_u[P-1:1];
        r_m    = sum_u[0];
        s_m    = 1'b0;
      end
      e_m       = EW'(ea) + EW'(lead0) - EW'(sub_far);
      no_shift  = lead0;
      s_prime_m = s_prime;
    end else begin
      frac_m    = n_close[P:2];
      r_m       = n_close[1];
      s_m       = n_close[0];
      e_m       = EW'(ea) + EW'(1) - EW'(lz);
      no_shift  = 1'b1;
      s_prime_m = 2'b00;
    end
  end

  sr_round_correction u_round (
    .r_bit   (r_m),
    .s_bit   (s_m),
    .g_bit   (grp[G_W-1]),
    .rnd_hi  (rnd[R_BITS-1 -: 2]),
    .s_prime (s_prime_m),
    .no_shift(no_shift),
    .c       (c)
  );

  always_comb begin
    rounded = {e_m[EXP_W-1:0], frac_m} + (EXP_W+MAN_W)'(c);

    if (x_nan || y_nan || (x_inf && y_inf && (sx != sy)))
      z = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    else if (x_inf)
      z = {sx, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (y_inf)
      z = {sy, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else if (a_zero)                         // both operands zero
      z = {sa && sb, {(EXP_W+MAN_W){1'b0}}};
    else if (b_zero)
      z = {sa, ea, fa};
    else if (!far && (sum_u == '0))          // exact cancellation
      z = '0;
    else if (e_m <= 0)                       // below the normal range: flush to zero
      z = {sa, {(EXP_W+MAN_W){1'b0}}};
    else if (e_m >= EW'((1 << EXP_W) - 1))   // overflow
      z = {sa, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    else
      z = {sa, rounded};
  end

  // On the far path the leading one of the sum is always at position 0 or 1, so the two
  // rounding cases (a) and (b) cover every far-path result.
  always_comb
    if (far) assert (sum_u[U-1 -: 2] != 2'b00) else $error("far-path sum not normalized");

  initial assert (R_BITS >= 4) else $error("fp_add_sr_eager: R_BITS must be >= 4");

endmodule
