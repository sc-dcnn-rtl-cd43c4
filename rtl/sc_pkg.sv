// sc_pkg: types and constants shared by the stochastic-computing CNN datapath.
//
// Number format used everywhere: a bipolar value x in [-1,1] travels as a bit
// stream whose probability of a 1 is (x+1)/2. Before it becomes a stream, x is
// held as an unsigned W-bit code c with P(1) = c / 2^W (the weight storage
// mapping Int((x+1)/2 * 2^W)). Binary counts produced by approximate parallel
// counters are unsigned; a count v out of N inputs stands for the bipolar sum
// 2v - N.
package sc_pkg;

  // Width of the pseudo-random numbers that feed the stochastic number generators.
  localparam int unsigned RND_W = 16;
  typedef logic [RND_W-1:0] rnd_t;

  // Width of a weight or pixel code as it arrives on the load bus (before the
  // weight SRAM drops least significant bits).
  localparam int unsigned CODE_W = 8;
  typedef logic [CODE_W-1:0] code_t;

  // Which layer a weight-load beat is addressed to.
  typedef enum logic [1:0] {
    LAYER0    = 2'd0,   // first convolution + pooling layer
    LAYER1    = 2'd1,   // second convolution + pooling layer
    LAYER2    = 2'd2,   // hidden fully connected layer
    LAYER_OUT = 2'd3    // output (class score) layer
  } layer_e;

  // Next state of the 16-bit Fibonacci LFSR x^16 + x^14 + x^13 + x^11 + 1
  // (maximal length, period 65535; the all-zero state is never entered).
  function automatic rnd_t lfsr16_next(input rnd_t s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  // Uniform index in [0, n) from a 16-bit random number: floor(r * n / 2^16).
  function automatic int unsigned scale_index(input rnd_t r, input int unsigned n);
    return int'((longint'(r) * longint'(n)) >>> RND_W);
  endfunction

  // State numbers of the activation blocks, from the empirical formulas of the
  // source. N is the inner product size, L the stream length; each result is
  // rounded to the nearest even number.
  function automatic int unsigned nearest_even(input real v);
    return 2 * int'($floor(v / 2.0 + 0.5));
  endfunction

  function automatic real log_b(input real v, input real b);
    return $ln(v) / $ln(b);
  endfunction

  // MUX-Avg-Stanh: K = 2 log2 N + (log2 L * N) / (alpha log2 N), alpha = 33.27
  function automatic int unsigned k_stanh_avg(input int unsigned n, input int unsigned l);
    return nearest_even(2.0 * log_b(real'(n), 2.0)
                        + log_b(real'(l), 2.0) * real'(n) / (33.27 * log_b(real'(n), 2.0)));
  endfunction

  // MUX-Max-Stanh: K = 2 (log2 N + log2 L) - alpha / log2 N - beta / log5 L,
  // alpha = 37, beta = 16.5
  function automatic int unsigned k_stanh_max(input int unsigned n, input int unsigned l);
    return nearest_even(2.0 * (log_b(real'(n), 2.0) + log_b(real'(l), 2.0))
                        - 37.0 / log_b(real'(n), 2.0) - 16.5 / log_b(real'(l), 5.0));
  endfunction

  // APC-Avg-Btanh: K = N / 2 (also used, for want of the cited formula, after
  // max pooling and in the fully connected layer)
  function automatic int unsigned k_btanh(input int unsigned n);
    return nearest_even(real'(n) / 2.0);
  endfunction

endpackage
