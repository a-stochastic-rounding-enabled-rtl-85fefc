// galois_lfsr: free-running r-bit pseudo-random source for stochastic rounding.
//
// A Galois linear feedback shift register, as the design calls for, advancing one step on
// every clock edge. Each step shifts the state right by one; when the bit shifted out is 1 the
// state is XORed with the feedback mask of a primitive polynomial (sr_mac_pkg::lfsr_taps), so
// the state walks through all 2^WIDTH-1 non-zero values before repeating. The whole state is
// presented as the random word `rnd`, so a fresh value is available in every cycle, in parallel
// with (and independent of) the multiplier and adder.
//
// Interface: clk, active-low synchronous reset rst_n (loads SEED), and rnd[WIDTH-1:0], valid
// from the first edge after reset. The register width equal to r, the mask table, the seed and
// the use of the full state as the output word are choices of this implementation. Since the
// all-zero word never occurs, a value x is rounded up with probability (k-1)/(2^r-1) or
// k/(2^r-1) instead of exactly k/2^r, a bias below 2^-r.
module galois_lfsr
  import sr_mac_pkg::*;
#(
  parameter int unsigned WIDTH = RAND_W,
  parameter logic [WIDTH-1:0] SEED = WIDTH'(1)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WIDTH-1:0] rnd
);

  localparam logic [WIDTH-1:0] TAPS = WIDTH'(lfsr_taps(WIDTH));

  logic [WIDTH-1:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)        state <= (SEED == '0) ? WIDTH'(1) : SEED;
    else if (state[0]) state <= (state >> 1) ^ TAPS;
    else               state <= state >> 1;
  end

  assign rnd = state;

  initial assert (WIDTH >= 2 && WIDTH <= 32) else $error("galois_lfsr: WIDTH must be 2..32");

endmodule
