// avg_pool_mux: stochastic average pooling over a 2x2 window.
//
// A 4-to-1 multiplexer with a random select passes one of its four input
// streams each clock, so the output stream carries the mean of the four
// values. Used after MUX-based inner product blocks, whose outputs are bit
// streams.
//
// Interface: in are the four stream bits, rnd supplies the select (its two
// most significant bits), y is the output bit. Timing: purely combinational.
module avg_pool_mux
  import sc_pkg::*;
(
  input  logic [3:0] in,
  input  rnd_t       rnd,
  output logic       y
);

  assign y = in[rnd[RND_W-1 -: 2]];

endmodule
