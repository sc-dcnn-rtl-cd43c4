// sc_dcnn_lenet5: stochastic-computing LeNet-5 classifier, fully parallel.
//
// Every neuron of the network has its own hardware, and all of them work on
// one bit of their streams per clock, so one image takes L clocks (the
// stream length) and a new image can start every L clocks. The layers are
//
//   pixels -> stream generators -> Layer0: 5x5 conv + 2x2 pool + tanh,
//             C0 maps (MUX-Avg-Stanh by default)
//          -> Layer1: 5x5 conv over all C0 maps + 2x2 pool + tanh,
//             C1 maps (APC-Avg-Btanh by default)
//          -> Layer2: F2 fully connected neurons, APC + Btanh
//          -> output layer: NCLS APC neurons whose bipolar sums are
//             accumulated over the L clocks into class scores.
//
// The defaults are the source's selected average-pooling configuration (No.11
// of its comparison): 28x28 input, 20 and 50 feature maps, 500 hidden and 10
// output neurons (784-11520-2880-3200-800-500-10), stream length 256, weight
// precision 7-7-6 bits, MUX in Layer0 and APC in Layer1 and Layer2. POOL_MAX
// switches both pooling layers to the hardware-oriented max pooling, and
// L0_APC/L1_APC choose the adder type per layer, which covers the other
// configurations of that comparison. The control sequencing, the load bus and
// the random number sources are this design's own.
//
// Interface:
//   start/ready  an image is accepted in a clock where both are high; pixels
//                (8-bit codes, P(1) = code/256) are sampled then.
//   wr_*         weight load: one beat writes all weights of one filter or
//                neuron (wr_row) of layer wr_layer; codes are 8-bit
//                Int((x+1)/2*256) and each layer keeps its top W0/W1/W2 bits.
//                Weights should not change while an image is in flight.
//   result_valid one-clock pulse with scores (sum over the image of the
//                output neurons' bipolar APC sums) and class_id (argmax).
// Timing: ready is high when idle and in the last clock of an image, so
// images can follow back to back every L clocks. The result of an image
// accepted at clock 0 appears at clock L + 4 (one clock per layer of
// registered activations, one for the score register).
module sc_dcnn_lenet5
  import sc_pkg::*;
#(
  parameter int unsigned IMG      = 28,
  parameter int unsigned KS       = 5,
  parameter int unsigned C0       = 20,
  parameter int unsigned C1       = 50,
  parameter int unsigned F2       = 500,
  parameter int unsigned NCLS     = 10,
  parameter int unsigned L        = 256,
  parameter int unsigned W0       = 7,
  parameter int unsigned W1       = 7,
  parameter int unsigned W2       = 6,
  parameter bit          L0_APC   = 1'b0,
  parameter bit          L1_APC   = 1'b1,
  parameter bit          POOL_MAX = 1'b0,
  parameter int unsigned SEG      = 16,
  // derived sizes
  parameter int unsigned N0       = KS * KS,
  parameter int unsigned P0       = (IMG - KS + 1) / 2,
  parameter int unsigned N1       = C0 * KS * KS,
  parameter int unsigned P1       = (P0 - KS + 1) / 2,
  parameter int unsigned NF       = C1 * P1 * P1,
  // activation state numbers from the source's empirical formulas (sc_pkg)
  parameter int unsigned K0       = L0_APC ? k_btanh(N0) : (POOL_MAX ? k_stanh_max(N0, L) : k_stanh_avg(N0, L)),
  parameter int unsigned K1       = L1_APC ? k_btanh(N1) : (POOL_MAX ? k_stanh_max(N1, L) : k_stanh_avg(N1, L)),
  parameter int unsigned K2       = k_btanh(NF),
  parameter int unsigned ROWMAX   = (NF > N1) ? ((NF > F2) ? NF : F2) : ((N1 > F2) ? N1 : F2),
  parameter int unsigned RWMAX    = $clog2(F2 + 1),
  parameter int unsigned SW       = $clog2(F2 * L + 1) + 2,
  parameter int unsigned CLSW     = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // image input
  input  logic                 start,
  output logic                 ready,
  input  code_t                pixels [IMG*IMG],
  // weight load
  input  logic                 wr_en,
  input  layer_e               wr_layer,
  input  logic [RWMAX-1:0]     wr_row,
  input  code_t                wr_data [ROWMAX],
  // result
  output logic                 result_valid,
  output logic signed [SW-1:0] scores [NCLS],
  output logic [CLSW-1:0]      class_id
);

  localparam int unsigned CNTW = $clog2(L);

  // ---------------------------------------------------------------- control
  logic            busy, last, accept;
  logic [CNTW-1:0] cnt;
  logic [1:0]      init_d;    // accept delayed by 1 and 2 clocks
  logic [2:0]      busy_d;    // busy delayed by 1..3 clocks
  logic [2:0]      last_d;    // last delayed by 1..3 clocks
  code_t           pix_reg [IMG*IMG];

  assign last   = busy && (cnt == CNTW'(L - 1));
  assign ready  = !busy || last;
  assign accept = start && ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      cnt    <= '0;
      init_d <= '0;
      busy_d <= '0;
      last_d <= '0;
    end else begin
      if (accept) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (last) begin
        busy <= 1'b0;
      end else if (busy) begin
        cnt <= cnt + 1'b1;
      end
      init_d <= {init_d[0], accept};
      busy_d <= {busy_d[1:0], busy};
      last_d <= {last_d[1:0], last};
    end
  end

  always_ff @(posedge clk) begin
    if (accept) pix_reg <= pixels;
  end

  // ----------------------------------------------------- random number sources
  rnd_t r_pix, r_w0, r_sel0, r_pool0, r_w1, r_sel1, r_pool1, r_w2, r_w3;

  lfsr #(.SEED(16'hACE1)) u_r_pix   (.clk, .rst_n, .en(1'b1), .rnd(r_pix));
  lfsr #(.SEED(16'h1D2C)) u_r_w0    (.clk, .rst_n, .en(1'b1), .rnd(r_w0));
  lfsr #(.SEED(16'h7F31)) u_r_sel0  (.clk, .rst_n, .en(1'b1), .rnd(r_sel0));
  lfsr #(.SEED(16'h4B95)) u_r_pool0 (.clk, .rst_n, .en(1'b1), .rnd(r_pool0));
  lfsr #(.SEED(16'hC3A7)) u_r_w1    (.clk, .rst_n, .en(1'b1), .rnd(r_w1));
  lfsr #(.SEED(16'h2E6B)) u_r_sel1  (.clk, .rst_n, .en(1'b1), .rnd(r_sel1));
  lfsr #(.SEED(16'h9D0F)) u_r_pool1 (.clk, .rst_n, .en(1'b1), .rnd(r_pool1));
  lfsr #(.SEED(16'h5A5A)) u_r_w2    (.clk, .rst_n, .en(1'b1), .rnd(r_w2));
  lfsr #(.SEED(16'hE817)) u_r_w3    (.clk, .rst_n, .en(1'b1), .rnd(r_w3));

  // ------------------------------------------------------------ weight load
  code_t wd0 [N0];
  code_t wd1 [N1];
  code_t wd2 [NF];
  code_t wd3 [F2];

  always_comb begin
    for (int i = 0; i < N0; i++) wd0[i] = wr_data[i];
    for (int i = 0; i < N1; i++) wd1[i] = wr_data[i];
    for (int i = 0; i < NF; i++) wd2[i] = wr_data[i];
    for (int i = 0; i < F2; i++) wd3[i] = wr_data[i];
  end

  // ----------------------------------------------------------------- datapath
  logic [IMG*IMG-1:0] pix_bits;
  logic [C0*P0*P0-1:0] l0_bits;
  logic [NF-1:0]       l1_bits;
  logic [F2-1:0]       l2_bits;

  sng #(.N(IMG*IMG), .W(CODE_W)) u_pix_sng (.code(pix_reg), .rnd(r_pix), .bits(pix_bits));

  conv_pool_layer #(
    .IN_CH(1), .IN_H(IMG), .KS(KS), .OUT_CH(C0), .W(W0),
    .USE_APC(L0_APC), .USE_MAX(POOL_MAX), .K(K0), .SEG(SEG)
  ) u_layer0 (
    .clk, .rst_n, .init(accept), .in_bits(pix_bits),
    .we(wr_en && wr_layer == LAYER0), .wr_row(wr_row[$clog2(C0 > 1 ? C0 : 2)-1:0]),
    .wdata(wd0), .rnd_w(r_w0), .rnd_sel(r_sel0), .rnd_pool(r_pool0),
    .out_bits(l0_bits)
  );

  conv_pool_layer #(
    .IN_CH(C0), .IN_H(P0), .KS(KS), .OUT_CH(C1), .W(W1),
    .USE_APC(L1_APC), .USE_MAX(POOL_MAX), .K(K1), .SEG(SEG)
  ) u_layer1 (
    .clk, .rst_n, .init(init_d[0]), .in_bits(l0_bits),
    .we(wr_en && wr_layer == LAYER1), .wr_row(wr_row[$clog2(C1 > 1 ? C1 : 2)-1:0]),
    .wdata(wd1), .rnd_w(r_w1), .rnd_sel(r_sel1), .rnd_pool(r_pool1),
    .out_bits(l1_bits)
  );

  fc_layer #(.NIN(NF), .NOUT(F2), .W(W2), .K(K2)) u_layer2 (
    .clk, .rst_n, .init(init_d[1]), .in_bits(l1_bits),
    .we(wr_en && wr_layer == LAYER2), .wr_row(wr_row[$clog2(F2 > 1 ? F2 : 2)-1:0]),
    .wdata(wd2), .rnd_w(r_w2), .out_bits(l2_bits)
  );

  output_layer #(.NIN(F2), .NCLS(NCLS), .W(W2), .L(L), .SW(SW)) u_out (
    .clk, .rst_n, .acc_en(busy_d[2]), .done(last_d[2]), .in_bits(l2_bits),
    .we(wr_en && wr_layer == LAYER_OUT), .wr_row(wr_row[CLSW-1:0]),
    .wdata(wd3), .rnd_w(r_w3),
    .scores, .class_id, .result_valid
  );

  initial assert (P1 >= 1 && L >= 2 && (L & (L - 1)) == 0)
    else $error("sc_dcnn_lenet5: bad size parameters");

endmodule
