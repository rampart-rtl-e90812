// brcvl_lfsr: 16-bit linear feedback shift register, the random number generator
// of the BRC-VL selection logic.
//
// One new pseudo-random bit enters each clock; the whole 16-bit state is the
// random number that the banks sample at the start of their RAAIMT windows. Since
// windows start at times set by the scheduler, the sampled value is hard to
// predict. One generator is shared by all banks.
//
// The 16-bit width and one bit per clock follow the design. The feedback polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (maximal length, period 65535), the Fibonacci form
// and the seed are choices of this design. A zero state cannot occur from a
// non-zero seed; reset loads SEED.
module brcvl_lfsr #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [15:0] rnd
);

  localparam int WIDTH = 16;

  logic fb;
  // taps 16, 14, 13, 11 (1-based) of a 16-bit register
  assign fb = rnd[15] ^ rnd[13] ^ rnd[12] ^ rnd[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED;
    else        rnd <= {rnd[WIDTH-2:0], fb};
  end

endmodule
