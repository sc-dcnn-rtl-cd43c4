// stanh: stochastic hyperbolic tangent, a K-state finite state machine.
//
// A saturating up/down counter over states 0..K-1 reads one stream bit per
// clock: a 1 moves it one state up, a 0 one state down. It outputs 1 while its
// state is at or above THRESH, otherwise 0. With THRESH = K/2 the output
// stream approximates tanh(K/2 * x) of the input value x; this is the
// activation of the MUX-Avg-Stanh block, where it also scales back the
// down-scaling of the multiplexer adders. For the MUX-Max-Stanh block the
// source moves the threshold to the left fifth of the states (THRESH = K/5,
// rounded down here). K is chosen per block by the empirical formulas of the
// source (see the README).
//
// Interface: init (one clock) puts the machine in state K/2 for a new image;
// in is the input bit; y the output bit. Timing: y depends on the state only,
// so an input bit affects y from the next clock on.
module stanh #(
  parameter int unsigned K      = 10,
  parameter int unsigned THRESH = K / 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic init,
  input  logic in,
  output logic y
);

  localparam int unsigned SW = $clog2(K);

  logic [SW-1:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n || init)             state <= SW'(K / 2);
    else if (in && state != SW'(K - 1)) state <= state + 1'b1;
    else if (!in && state != '0)    state <= state - 1'b1;
  end

  assign y = (state >= SW'(THRESH));

  initial assert (K >= 2 && K % 2 == 0 && THRESH < K)
    else $error("stanh: K must be even and THRESH < K");

endmodule
