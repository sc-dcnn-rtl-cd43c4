// weight_sram: the local weight memory of one filter (filter-aware SRAM sharing).
//
// One memory holds the N weights of one filter, or of one fully connected
// neuron, and is shared by every inner product block that uses that filter.
// Weights arrive as CODE_W-bit codes Int((x+1)/2 * 2^8); the memory keeps only
// the W most significant bits of each, which is exactly the low-precision
// mapping Int((x+1)/2 * 2^W) / 2^W, so W sets the stored precision per layer
// (7, 7 and 6 bits in the three layers of the reference network).
//
// Because every stochastic number generator fed by the memory needs its weight
// in every clock, all N words are read in parallel (rdata). Writes are one
// whole filter per beat (we with wdata), a load format chosen for this design.
// Timing: rdata shows a write from the next cycle on. Contents are not reset.
module weight_sram
  import sc_pkg::*;
#(
  parameter int unsigned N = 25,
  parameter int unsigned W = 7
) (
  input  logic         clk,
  input  logic         we,
  input  code_t        wdata [N],
  output logic [W-1:0] rdata [N]
);

  logic [W-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int unsigned i = 0; i < N; i++) mem[i] <= wdata[i][CODE_W-1 -: W];
    end
  end

  assign rdata = mem;

  initial assert (W >= 1 && W <= CODE_W) else $error("weight_sram: W out of range");

endmodule
