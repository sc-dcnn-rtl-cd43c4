// feature_extraction_block: four inner products, one 2x2 pooling, one activation.
//
// The unit of the network: it computes the four convolution outputs of one
// 2x2 pooling window of one feature map, pools them and applies tanh, so its
// output stream is one pixel of the next feature map. The four inner product
// blocks share the filter's weight streams w; each gets its own receptive
// field x[q]. Two build-time switches select the four configurations studied
// in the source:
//
//   USE_APC=0 USE_MAX=0  MUX-Avg-Stanh: MUX adders, 4-to-1 MUX pooling, Stanh
//   USE_APC=0 USE_MAX=1  MUX-Max-Stanh: MUX adders, max pooling, Stanh with
//                        threshold at K/5
//   USE_APC=1 USE_MAX=0  APC-Avg-Btanh: APC adders, binary average, Btanh
//   USE_APC=1 USE_MAX=1  APC-Max-Btanh: APC adders, max pooling with
//                        accumulators, Btanh
//
// Interface: init (one clock) starts a new image (activation state to its
// middle, max-pooling segments restarted); rnd_sel randomises the MUX adders'
// selects, rnd_pool the pooling multiplexer. Timing: the output bit y comes
// from the activation's state register, one clock after the inputs it
// reflects.
module feature_extraction_block
  import sc_pkg::*;
#(
  parameter int unsigned N       = 25,
  parameter bit          USE_APC = 1'b0,
  parameter bit          USE_MAX = 1'b0,
  parameter int unsigned K       = 10,
  parameter int unsigned THRESH  = USE_MAX ? K / 5 : K / 2,
  parameter int unsigned SEG     = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic [N-1:0] x [4],
  input  logic [N-1:0] w,
  input  rnd_t         rnd_sel,
  input  rnd_t         rnd_pool,
  output logic         y
);

  localparam int unsigned CW = $clog2(N + 2);

  if (!USE_APC) begin : g_mux
    logic [3:0] ip;
    logic       pooled;

    for (genvar q = 0; q < 4; q++) begin : g_ip
      mux_inner_product #(.N(N)) u_ip (.x(x[q]), .w(w), .rnd(rnd_sel), .y(ip[q]));
    end

    if (!USE_MAX) begin : g_avg
      avg_pool_mux u_pool (.in(ip), .rnd(rnd_pool), .y(pooled));
    end else begin : g_max
      logic [0:0] ipv [4];
      logic [1:0] sel;
      for (genvar q = 0; q < 4; q++) begin : g_v
        assign ipv[q] = ip[q];
      end
      max_pool #(.DW(1), .C(SEG)) u_pool (
        .clk, .rst_n, .start(init), .rnd(rnd_pool), .in(ipv), .y(pooled), .sel(sel)
      );
    end

    stanh #(.K(K), .THRESH(THRESH)) u_act (
      .clk, .rst_n, .init, .in(pooled), .y(y)
    );
  end else begin : g_apc
    logic [CW-1:0] ip [4];
    logic [CW-1:0] pooled;

    for (genvar q = 0; q < 4; q++) begin : g_ip
      apc_inner_product #(.N(N), .CW(CW)) u_ip (.x(x[q]), .w(w), .count(ip[q]));
    end

    if (!USE_MAX) begin : g_avg
      avg_pool_bin #(.CW(CW)) u_pool (.in(ip), .avg(pooled));
    end else begin : g_max
      logic [1:0] sel;
      max_pool #(.DW(CW), .C(SEG)) u_pool (
        .clk, .rst_n, .start(init), .rnd(rnd_pool), .in(ip), .y(pooled), .sel(sel)
      );
    end

    btanh #(.N(N), .K(K), .CW(CW)) u_act (
      .clk, .rst_n, .init, .v(pooled), .y(y)
    );
  end

endmodule
