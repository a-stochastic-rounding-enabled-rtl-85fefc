// sr_mac_pkg: formats and constants shared by the stochastic-rounding MAC.
//
// The multiplier inputs are FP8 E5M2 (sign, 5 exponent bits, 2 fraction bits, precision
// p_m = 3). The exact product and the accumulator are FP12 E6M5 (precision p_a = 2*p_m = 6,
// exponent width E_a = E_m + 1), as the design this RTL follows specifies. Both formats use
// an IEEE-754-like encoding: bias 2^(E-1)-1, exponent field all ones for Inf/NaN, and exponent
// field zero for zero. Subnormals are not supported: an exponent field of zero is read as a
// (signed) zero whatever the fraction, and results below the smallest normal become zero.
//
// The default number of random bits, 13, is the setting found best for training.
// lfsr_taps() gives a maximal-length Galois feedback mask for widths 2..32 (primitive
// trinomials/pentanomials from the usual published tables).
package sr_mac_pkg;

  localparam int unsigned MUL_EXP_W = 5;   // E_m
  localparam int unsigned MUL_MAN_W = 2;   // p_m - 1
  localparam int unsigned ACC_EXP_W = MUL_EXP_W + 1;              // E_a = E_m + 1
  localparam int unsigned ACC_MAN_W = 2 * (MUL_MAN_W + 1) - 1;    // p_a - 1 = 2 p_m - 1
  localparam int unsigned RAND_W    = 13;  // r

  // Galois right-shift LFSR feedback mask: bit (k-1) set for each term x^k of the
  // characteristic polynomial (the x^0 term is implicit).
  function automatic logic [31:0] lfsr_taps(input int unsigned width);
    case (width)
      2:  return 32'h0000_0003;
      3:  return 32'h0000_0006;
      4:  return 32'h0000_000C;
      5:  return 32'h0000_0014;
      6:  return 32'h0000_0030;
      7:  return 32'h0000_0060;
      8:  return 32'h0000_00B8;
      9:  return 32'h0000_0110;
      10: return 32'h0000_0240;
      11: return 32'h0000_0500;
      12: return 32'h0000_0829;
      13: return 32'h0000_100D;
      14: return 32'h0000_2015;
      15: return 32'h0000_6000;
      16: return 32'h0000_D008;
      17: return 32'h0001_2000;
      18: return 32'h0002_0400;
      19: return 32'h0004_0023;
      20: return 32'h0009_0000;
      21: return 32'h0014_0000;
      22: return 32'h0030_0000;
      23: return 32'h0042_0000;
      24: return 32'h00E1_0000;
      25: return 32'h0120_0000;
      26: return 32'h0200_0023;
      27: return 32'h0400_0013;
      28: return 32'h0900_0000;
      29: return 32'h1400_0000;
      30: return 32'h2000_0029;
      31: return 32'h4800_0000;
      32: return 32'h8020_0003;
      default: return 32'h0;
    endcase
  endfunction

endpackage
