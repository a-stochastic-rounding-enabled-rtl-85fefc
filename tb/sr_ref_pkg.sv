// sr_ref_pkg: bit-accurate reference models for the stochastic-rounding MAC testbenches.
//
// The models work on values, not on the hardware structure. ref_add computes the exact sum or
// difference of x and y on the same truncation grid as the adder (r-1 bits below the LSB of
// the larger operand, r bits for a subtraction with exponent difference >= 2), normalizes it,
// and rounds up when the discarded fraction F (scaled to r bits) plus the random word X
// reaches 2^r. When exactly r-1 fraction bits remain, X is {rnd[r-1:r-2], rnd[r-4:0], 0},
// the bit order of the eager adder; every X is equally likely either way, which the
// exhaustive tests check separately. ref_mul is the exact FP8 E5M2 product in FP12 E6M5.
// ref_class reports which adder path and case an addition exercises, for coverage counts.
package sr_ref_pkg;

  localparam int E = 6;
  localparam int M = 5;
  localparam int P = M + 1;

  typedef enum int {C_SPECIAL, C_ZERO_OP, C_FAR_ADD_CARRY, C_FAR_ADD_SHIFT, C_FAR_SUB_CARRY,
                    C_FAR_SUB_SHIFT, C_CLOSE_ADD, C_CLOSE_SUB, C_CANCEL, C_FLUSH, C_OVERFLOW,
                    C_NUM} cls_e;

  // Returns the result; cls, the class; frac_r, the discarded fraction scaled to r bits
  // (-1 when the result is exact or exceptional), trunc, the truncated (round-down) result.
  function automatic logic [11:0] ref_add(input logic [11:0] x, input logic [11:0] y,
                                          input logic [31:0] rnd, input int r,
                                          output cls_e cls, output longint frac_r,
                                          output logic [11:0] trunc);
    logic sx, sy, sa, sb;
    int ex, ey, ea, eb, d, lg, h, L, e;
    longint fx, fy, ma, mb, A, B, T, sig, F, X;
    logic up;
    logic [10:0] body;
    sx = x[11]; ex = int'(x[10:5]); fx = longint'(x[4:0]);
    sy = y[11]; ey = int'(y[10:5]); fy = longint'(y[4:0]);
    frac_r = -1;
    cls = C_SPECIAL;
    trunc = 'x;
    if ((ex == 63 && fx != 0) || (ey == 63 && fy != 0) || (ex == 63 && ey == 63 && sx != sy))
      return 12'h7E0 | 12'h010;
    if (ex == 63) return {sx, 6'h3F, 5'h0};
    if (ey == 63) return {sy, 6'h3F, 5'h0};
    if ((ey > ex) || (ey == ex && fy > fx)) begin
      sa = sy; ea = ey; ma = fy; sb = sx; eb = ex; mb = fx;
    end else begin
      sa = sx; ea = ex; ma = fx; sb = sy; eb = ey; mb = fy;
    end
    cls = C_ZERO_OP;
    if (ea == 0) return {sa & sb, 11'h0};
    if (eb == 0) return {sa, 6'(ea), 5'(ma)};
    ma = ma + (1 << M);
    mb = mb + (1 << M);
    d  = ea - eb;
    lg = (sa != sb && d >= 2) ? r : r - 1;
    A  = ma << lg;
    B  = (d > 62) ? 0 : ((mb << lg) >> d);
    T  = (sa != sb) ? A - B : A + B;
    if (T == 0) begin cls = C_CANCEL; trunc = 12'h0; return 12'h0; end
    h = 0;
    for (int i = 0; i < 62; i++) if (T >= (longint'(1) << i)) h = i;
    L = h - (P - 1);
    if (L > 0) begin sig = T >> L; F = T & ((longint'(1) << L) - 1); end
    else begin sig = T << (-L); F = 0; end
    e = ea + h - (P - 1) - lg;
    if (d >= 2) begin
      if (sa != sb) cls = (L == r) ? C_FAR_SUB_CARRY : C_FAR_SUB_SHIFT;
      else          cls = (L == r) ? C_FAR_ADD_CARRY : C_FAR_ADD_SHIFT;
    end else cls = (sa != sb) ? C_CLOSE_SUB : C_CLOSE_ADD;
    if (L > r) $fatal(1, "ref_add: unexpected fraction length");
    if (L == r - 1)
      X = (longint'(rnd[r-1]) << (r - 1)) | (longint'(rnd[r-2]) << (r - 2))
        | ((longint'(rnd) & ((longint'(1) << (r - 3)) - 1)) << 1);
    else
      X = longint'(rnd) & ((longint'(1) << r) - 1);
    if (L > 0) frac_r = F << (r - L); else frac_r = 0;
    up = (frac_r + X) >= (longint'(1) << r);
    if (e <= 0) begin cls = C_FLUSH; frac_r = -1; return {sa, 11'h0}; end
    if (e >= 63) begin cls = C_OVERFLOW; frac_r = -1; return {sa, 6'h3F, 5'h0}; end
    trunc = {sa, 6'(e), 5'(sig)};
    body = {6'(e), 5'(sig)} + 11'(up);
    if (body[10:5] == 6'h3F) cls = C_OVERFLOW;
    return {sa, body};
  endfunction

  function automatic logic [11:0] ref_mul(input logic [7:0] a, input logic [7:0] b);
    int ea, eb, e;
    int ma, mb, pr;
    logic s;
    s = a[7] ^ b[7];
    ea = int'(a[6:2]); eb = int'(b[6:2]);
    if ((ea == 31 && a[1:0] != 0) || (eb == 31 && b[1:0] != 0) ||
        (ea == 31 && eb == 0) || (eb == 31 && ea == 0)) return 12'h7F0;
    if (ea == 31 || eb == 31) return {s, 6'h3F, 5'h0};
    if (ea == 0 || eb == 0) return {s, 11'h0};
    ma = 4 + int'(a[1:0]); mb = 4 + int'(b[1:0]);
    pr = ma * mb;                         // value pr/16 in [1,4)
    // unbiased exponent (ea-15)+(eb-15); FP12 bias 31
    e = (ea - 15) + (eb - 15) + 31;
    if (pr >= 32) return {s, 6'(e + 1), 5'(pr - 32)};
    return {s, 6'(e), 5'((pr - 16) << 1)};
  endfunction

endpackage
