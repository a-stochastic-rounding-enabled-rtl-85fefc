// sr_sticky_round: first stage of the eager stochastic rounding.
//
// Right after significand alignment, the r-2 least significant bits of the aligned (and, for
// an effective subtraction, two's-complemented) operand y -- the bits that lie below the
// guard position, the first of them being G -- are added to the r-2 low bits of the random
// word. This runs in parallel with the significand addition. Two carries come out:
//   S'1 = carry out of the full (r-2)-bit sum: the rounding carry these bits pass up when the
//         addition result needs no left shift;
//   S'2 = carry out of the low r-3 bits, i.e. the carry into the position of G: the carry
//         these bits pass up when the result is shifted left by one bit, G then becomes the
//         round-correction operand and only the bits below G remain below it.
// S'2 is taken from the same adder as the XOR of its top sum bit with the two top addends.
// The design describes S' as the two most significant bits of this stage and says the carry
// "becomes S'2" after a shift; reading S'2 as the internal carry is this implementation's
// choice, the one that makes the eager result match the classic (lazy) rounding.
//
// Purely combinational. Needs r >= 4.
module sr_sticky_round #(
  parameter int unsigned R_BITS = 13,
  localparam int unsigned G_W = R_BITS - 2
) (
  input  logic [G_W-1:0] grp,       // aligned y bits at positions p+2 .. p+r-1 (G first)
  input  logic [G_W-1:0] rnd_lo,    // random bits R3 ...
  output logic [1:0]     s_prime    // {S'1, S'2}
);

  logic [G_W:0] sum;

  always_comb begin
    sum        = {1'b0, grp} + {1'b0, rnd_lo};
    s_prime[1] = sum[G_W];
    s_prime[0] = sum[G_W-1] ^ grp[G_W-1] ^ rnd_lo[G_W-1];
  end

  initial assert (R_BITS >= 4) else $error("sr_sticky_round: R_BITS must be >= 4");

endmodule
