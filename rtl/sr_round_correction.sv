// sr_round_correction: second stage of the eager stochastic rounding (carry-select form).
//
// Produces the rounding carry c that the final incrementer adds to the result LSB. Two
// 2-bit sums are formed in parallel with the normalization: {R,S}+{R1,R2} for a result that
// was not shifted left, and {R,G}+{R1,R2} for a result that was shifted left by one bit, where
// the guard bit G replaces the 0 that the shift moved into the last position. A select signal
// (no_shift, from the adder carry) picks one 3-bit sum together with the matching first-stage
// carry, S'1 or S'2, and a last addition gives c = 1 when the total reaches 4 (a carry into
// the result LSB). R1,R2 are the two most significant random bits.
//
// The structure (two adders, carry select, final adder, 3-bit and 1-bit widths) follows the
// design's Round Correction drawing; the select polarity is stated in its text.
// Purely combinational.
module sr_round_correction (
  input  logic       r_bit,     // R: first bit below the result LSB, after normalization
  input  logic       s_bit,     // S: second bit below the LSB when no left shift took place
  input  logic       g_bit,     // G: guard bit of the aligned operand
  input  logic [1:0] rnd_hi,    // {R1, R2}
  input  logic [1:0] s_prime,   // {S'1, S'2} from sr_sticky_round
  input  logic       no_shift,  // 1: result not shifted left (use S and S'1)
  output logic       c          // rounding carry
);

  logic [2:0] sum_a, sum_b, sel_sum;
  logic       sel_cin;
  logic [2:0] total;

  always_comb begin
    sum_a   = {1'b0, r_bit, s_bit} + {1'b0, rnd_hi};
    sum_b   = {1'b0, r_bit, g_bit} + {1'b0, rnd_hi};
    sel_sum = no_shift ? sum_a : sum_b;
    sel_cin = no_shift ? s_prime[1] : s_prime[0];
    total   = sel_sum + {2'b00, sel_cin};
    c       = total[2];
  end

endmodule
