// btanh: binary-input hyperbolic tangent, a saturating up/down counter.
//
// Converts the binary count v in [0, N] of an approximate parallel counter
// (possibly after pooling) back into a bit stream while applying a scaled
// tanh. Each clock the counter moves by the bipolar sum 2v - N and saturates
// at 0 and K-1; the output is 1 while the counter is at or above K/2. The
// source cites this block from other work and gives, for use after average
// pooling, K = N/2 rounded to an even number; the update rule written here is
// the standard one for such a counter and is this design's reading.
//
// Interface: init (one clock) sets the counter to K/2 for a new image; v is
// the count; y the output bit. Timing: y depends on the counter only, so an
// input affects y from the next clock on.
module btanh #(
  parameter int unsigned N  = 500,
  parameter int unsigned K  = 250,
  parameter int unsigned CW = $clog2(N + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [CW-1:0] v,
  output logic          y
);

  localparam int unsigned SW = $clog2(K + 2 * N + 2) + 1;   // signed width

  logic signed [SW-1:0] state;
  logic signed [SW-1:0] nxt;

  always_comb begin
    nxt = state + signed'(SW'(v) << 1) - signed'(SW'(N));
    if (nxt < 0)                      nxt = '0;
    else if (nxt > SW'(K - 1))        nxt = SW'(K - 1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || init) state <= SW'(K / 2);
    else                state <= nxt;
  end

  assign y = (state >= SW'(K / 2));

  initial assert (K >= 2 && K % 2 == 0) else $error("btanh: K must be even");

endmodule
