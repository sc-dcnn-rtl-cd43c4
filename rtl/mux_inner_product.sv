// mux_inner_product: MUX-based stochastic inner product block.
//
// Multiplies N bipolar input streams by N bipolar weight streams with XNOR
// gates and adds them with an N-to-1 multiplexer whose select is a fresh
// random index in [0, N) every clock. The output stream therefore carries
// (1/N) * sum(x_i * w_i): a scaled-down sum. The select index is formed from a
// 16-bit random number as floor(rnd * N / 2^16), which is uniform within one
// part in 2^16 for any N (this mapping is this design's choice).
//
// Interface: x, w stream bits; rnd the select randomness; y the output bit.
// Timing: purely combinational.
module mux_inner_product
  import sc_pkg::*;
#(
  parameter int unsigned N = 25
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] w,
  input  rnd_t         rnd,
  output logic         y
);

  logic [N-1:0] prod;
  int unsigned  sel;

  assign prod = ~(x ^ w);   // bipolar multiplication
  assign sel  = scale_index(rnd, N);
  assign y    = prod[sel];

endmodule
