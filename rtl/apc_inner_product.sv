// apc_inner_product: APC-based stochastic inner product block.
//
// Multiplies N bipolar input streams by N bipolar weight streams with XNOR
// gates and adds the N products each clock with an approximate parallel
// counter. The output is a binary count v in [0, N] per clock; 2v - N is the
// bipolar sum of the products in that clock, so the block does not scale its
// result down (unlike the multiplexer adder).
//
// Interface: x and w are the input and weight stream bits, count the APC
// output. Timing: purely combinational.
module apc_inner_product #(
  parameter int unsigned N  = 25,
  parameter int unsigned CW = $clog2(N + 2)
) (
  input  logic [N-1:0]  x,
  input  logic [N-1:0]  w,
  output logic [CW-1:0] count
);

  logic [N-1:0] prod;
  assign prod = ~(x ^ w);   // bipolar multiplication

  apc #(.N(N), .CW(CW)) u_apc (.in(prod), .count(count));

endmodule
