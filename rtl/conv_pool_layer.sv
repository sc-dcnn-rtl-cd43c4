// conv_pool_layer: one convolution + 2x2 pooling + tanh layer, fully parallel.
//
// OUT_CH feature maps are produced at once, one feature extraction block per
// output pixel, so the whole layer works on every bit of every stream in the
// same clock. Weights follow the filter-aware SRAM sharing scheme: each
// feature map (filter) has its own local weight memory and its own bank of
// weight stream generators, and that bank feeds only the inner product
// blocks of its own map. An output pixel (py, px) pools the convolution
// outputs at (2py+dy, 2px+dx), dy, dx in {0, 1}; the receptive field of a
// convolution output (oy, ox) is all IN_CH channels of rows oy..oy+KS-1 and
// columns ox..ox+KS-1 (stride 1, no padding), flattened as
// c*KS*KS + ky*KS + kx, which is also the order of a filter's weights.
//
// Interface: in_bits holds the IN_CH x IN_H x IN_H input streams, flattened as
// c*IN_H*IN_H + y*IN_H + x; out_bits the OUT_CH x PH x PH output streams in
// the same order. we/wr_row/wdata write all N weights of filter wr_row in one
// beat. rnd_w drives the weight generators, rnd_sel and rnd_pool the MUX
// selects. Timing: out_bits are registered, one clock after in_bits; init
// (one clock) restarts the activation state of every block for a new image.
module conv_pool_layer
  import sc_pkg::*;
#(
  parameter int unsigned IN_CH   = 1,
  parameter int unsigned IN_H    = 28,
  parameter int unsigned KS      = 5,
  parameter int unsigned OUT_CH  = 20,
  parameter int unsigned W       = 7,
  parameter bit          USE_APC = 1'b0,
  parameter bit          USE_MAX = 1'b0,
  parameter int unsigned K       = 10,
  parameter int unsigned SEG     = 16,
  parameter int unsigned N       = IN_CH * KS * KS,
  parameter int unsigned OH      = IN_H - KS + 1,
  parameter int unsigned PH      = OH / 2,
  parameter int unsigned RW      = (OUT_CH > 1) ? $clog2(OUT_CH) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         init,
  input  logic [IN_CH*IN_H*IN_H-1:0]   in_bits,
  input  logic                         we,
  input  logic [RW-1:0]                wr_row,
  input  code_t                        wdata [N],
  input  rnd_t                         rnd_w,
  input  rnd_t                         rnd_sel,
  input  rnd_t                         rnd_pool,
  output logic [OUT_CH*PH*PH-1:0]      out_bits
);

  for (genvar f = 0; f < OUT_CH; f++) begin : g_map
    logic [W-1:0] wcode [N];
    logic [N-1:0] wbits;

    weight_sram #(.N(N), .W(W)) u_sram (
      .clk, .we(we && wr_row == RW'(f)), .wdata, .rdata(wcode)
    );

    sng #(.N(N), .W(W)) u_wsng (.code(wcode), .rnd(rnd_w), .bits(wbits));

    for (genvar py = 0; py < PH; py++) begin : g_y
      for (genvar px = 0; px < PH; px++) begin : g_x
        logic [N-1:0] field [4];

        always_comb begin
          for (int q = 0; q < 4; q++) begin
            for (int c = 0; c < IN_CH; c++) begin
              for (int ky = 0; ky < KS; ky++) begin
                for (int kx = 0; kx < KS; kx++) begin
                  field[q][c*KS*KS + ky*KS + kx] =
                    in_bits[c*IN_H*IN_H + (2*py + q/2 + ky)*IN_H + (2*px + q%2 + kx)];
                end
              end
            end
          end
        end

        feature_extraction_block #(
          .N(N), .USE_APC(USE_APC), .USE_MAX(USE_MAX), .K(K), .SEG(SEG)
        ) u_feb (
          .clk, .rst_n, .init, .x(field), .w(wbits),
          .rnd_sel, .rnd_pool, .y(out_bits[f*PH*PH + py*PH + px])
        );
      end
    end
  end

  initial assert (OH % 2 == 0) else $error("conv_pool_layer: odd convolution output size");

endmodule
