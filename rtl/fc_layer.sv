// fc_layer: fully connected layer of APC inner products and Btanh activations.
//
// Each of NOUT neurons multiplies all NIN input streams by its own weight
// streams (XNOR), counts the products with an approximate parallel counter
// and turns the count back into a stream with a Btanh counter (no pooling).
// Each neuron has its own local weight memory and generator bank (the
// fully connected case of filter-aware SRAM sharing: one "filter" per neuron).
//
// Interface: in_bits are the input streams, out_bits the output streams;
// we/wr_row/wdata write the NIN weights of neuron wr_row in one beat; rnd_w
// drives the weight generators. Timing: out_bits are registered, one clock
// after in_bits; init (one clock) restarts every Btanh counter.
module fc_layer
  import sc_pkg::*;
#(
  parameter int unsigned NIN  = 800,
  parameter int unsigned NOUT = 500,
  parameter int unsigned W    = 6,
  parameter int unsigned K    = 400,
  parameter int unsigned RW   = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic [NIN-1:0]  in_bits,
  input  logic            we,
  input  logic [RW-1:0]   wr_row,
  input  code_t           wdata [NIN],
  input  rnd_t            rnd_w,
  output logic [NOUT-1:0] out_bits
);

  localparam int unsigned CW = $clog2(NIN + 2);

  for (genvar j = 0; j < NOUT; j++) begin : g_neuron
    logic [W-1:0]  wcode [NIN];
    logic [NIN-1:0] wbits;
    logic [CW-1:0] count;

    weight_sram #(.N(NIN), .W(W)) u_sram (
      .clk, .we(we && wr_row == RW'(j)), .wdata, .rdata(wcode)
    );

    sng #(.N(NIN), .W(W)) u_wsng (.code(wcode), .rnd(rnd_w), .bits(wbits));

    apc_inner_product #(.N(NIN), .CW(CW)) u_ip (.x(in_bits), .w(wbits), .count(count));

    btanh #(.N(NIN), .K(K), .CW(CW)) u_act (
      .clk, .rst_n, .init, .v(count), .y(out_bits[j])
    );
  end

endmodule
