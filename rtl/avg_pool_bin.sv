// avg_pool_bin: binary average pooling over a 2x2 window.
//
// Used after APC-based inner product blocks, whose outputs are binary counts:
// the four counts are added and divided by four with a shift, dropping the
// fractional part (the mean of 2, 3, 4, 5 comes out as 3).
//
// Interface: in are four CW-bit counts, avg their truncated mean.
// Timing: purely combinational.
module avg_pool_bin #(
  parameter int unsigned CW = 5
) (
  input  logic [CW-1:0] in [4],
  output logic [CW-1:0] avg
);

  logic [CW+1:0] sum;
  assign sum = (CW+2)'(in[0]) + (CW+2)'(in[1]) + (CW+2)'(in[2]) + (CW+2)'(in[3]);
  assign avg = sum[CW+1:2];

endmodule
