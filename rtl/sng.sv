// sng: bank of stochastic number generators (binary code -> bit stream).
//
// Each of the N lanes compares its W-bit code with the W most significant
// bits of a shared random number and emits 1 when the random number is
// smaller, so a lane's stream carries P(1) = code / 2^W, the bipolar value
// 2*code/2^W - 1. All lanes share one random number: their streams are
// correlated with each other, which leaves sums of their products unbiased,
// but must be independent of the streams they are multiplied with, which
// come from a different random source. Sharing one source per bank is this
// design's choice; the source description only names the generators.
//
// Interface: code[i] is lane i's value, rnd the shared random number, bits[i]
// the lane's stream bit. Timing: purely combinational.
module sng
  import sc_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] code [N],
  input  rnd_t         rnd,
  output logic [N-1:0] bits
);

  logic [W-1:0] r;
  assign r = rnd[RND_W-1 -: W];

  always_comb begin
    for (int unsigned i = 0; i < N; i++) bits[i] = (r < code[i]);
  end

endmodule
