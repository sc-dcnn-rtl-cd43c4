// lfsr: pseudo-random number source for the stochastic number generators and
// for the random select lines of the multiplexer adders.
//
// A 16-bit Fibonacci linear-feedback shift register, polynomial
// x^16 + x^14 + x^13 + x^11 + 1, advancing one step per enabled clock. Every
// instance gets its own non-zero SEED so that streams that meet in an XNOR
// multiplier come from differently phased sequences. The random number
// generator itself is only cited, not designed, in the source description; the
// LFSR is this design's choice.
//
// Interface: rnd is the current register value, valid from reset onwards.
// Timing: rnd changes one cycle after each cycle with en high; a synchronous
// active-low reset loads SEED.
module lfsr
  import sc_pkg::*;
#(
  parameter rnd_t SEED = 16'hACE1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output rnd_t rnd
);

  always_ff @(posedge clk) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= lfsr16_next(rnd);
  end

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

endmodule
