// apc: approximate parallel counter (APC).
//
// Counts, per clock, the ones among N stream bits and gives the count in
// binary. The first level pairs the inputs (in[2i], in[2i+1]) and replaces
// each pair by one gate: even pairs by OR, odd pairs by AND, as in the 16-input
// counter of the source description. Since a+b = (a|b) + (a&b), an OR of one
// pair and an AND of another stand in, on average, for their two sums, so the
// exact count of the N/2 gate outputs, weighted by 2, approximates the count
// of the N inputs (that is why the least significant output bit has weight
// 2^1). The gate outputs are then added exactly; for N = 16 this is the full
// adder tree drawn in the source, written here as a sum. For odd N the last
// input is added with weight 1 (this design's choice).
//
// Interface: in are the product bits, count the approximate number of ones.
// Timing: purely combinational.
module apc #(
  parameter int unsigned N  = 16,
  parameter int unsigned CW = $clog2(N + 2)
) (
  input  logic [N-1:0]  in,
  output logic [CW-1:0] count
);

  localparam int unsigned P = N / 2;

  always_comb begin
    logic [CW-1:0] s;
    s = '0;
    for (int unsigned i = 0; i < P; i++) begin
      if (i % 2 == 0) s += CW'(in[2*i] | in[2*i+1]);
      else            s += CW'(in[2*i] & in[2*i+1]);
    end
    count = s << 1;
    if (N % 2 == 1) count += CW'(in[N-1]);
  end

endmodule
