// max_pool: hardware-oriented (approximate) max pooling over a 2x2 window.
//
// The four inputs are cut in time into segments of C clocks. During each
// segment one counter per input adds up what that input delivered (for
// stream inputs, DW = 1, its ones; for binary APC counts, the counts
// themselves, i.e. the counters become accumulators). At the last clock of a
// segment a comparator picks the input with the largest total, and that input
// is passed to the output for the whole of the next segment. The first
// segment after start uses a random input. The output thus needs no extra
// latency; the globally largest input is, with high probability, also the
// locally largest in each segment.
//
// Follows the source: segment counters, comparator, 4-to-1 multiplexer and a
// controller that marks segment boundaries; segment length 16. This design's
// choices: on a tie the lowest-numbered input wins; the counters restart and
// the random first choice is drawn when start is high.
//
// Interface: start (one clock) begins a new stream; rnd gives the random first
// select (two most significant bits); in are the four inputs; y is the
// selected input, combinational from in. sel shows the current selection.
// Timing: the comparison made in the last clock of a segment controls the
// multiplexer from the next clock on.
module max_pool
  import sc_pkg::*;
#(
  parameter int unsigned DW = 1,
  parameter int unsigned C  = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  rnd_t          rnd,
  input  logic [DW-1:0] in [4],
  output logic [DW-1:0] y,
  output logic [1:0]    sel
);

  localparam int unsigned AW = DW + $clog2(C + 1);
  localparam int unsigned SW = (C > 1) ? $clog2(C) : 1;

  logic [AW-1:0] acc [4];
  logic [AW-1:0] tot [4];
  logic [SW-1:0] pos;        // controller: position inside the segment
  logic          seg_end;
  logic [1:0]    best;

  assign seg_end = (pos == SW'(C - 1));

  // Counters including the current clock's input, as seen by the comparator.
  always_comb begin
    for (int i = 0; i < 4; i++) tot[i] = acc[i] + AW'(in[i]);
  end

  // Comparator: index of the largest total, lowest index on ties.
  always_comb begin
    best = 2'd0;
    for (int i = 1; i < 4; i++) begin
      if (tot[i] > tot[best]) best = 2'(i);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos <= '0;
      sel <= '0;
      for (int i = 0; i < 4; i++) acc[i] <= '0;
    end else if (start) begin
      pos <= '0;
      sel <= rnd[RND_W-1 -: 2];
      for (int i = 0; i < 4; i++) acc[i] <= '0;
    end else if (seg_end) begin
      pos <= '0;
      sel <= best;
      for (int i = 0; i < 4; i++) acc[i] <= '0;
    end else begin
      pos <= pos + 1'b1;
      for (int i = 0; i < 4; i++) acc[i] <= tot[i];
    end
  end

  assign y = in[sel];

endmodule
