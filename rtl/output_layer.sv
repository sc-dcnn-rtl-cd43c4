// output_layer: class-score layer (last fully connected layer, no activation).
//
// Each of NCLS class neurons counts its XNOR products with an approximate
// parallel counter, as in fc_layer, but instead of an activation it adds the
// bipolar sum 2v - NIN of every clock of the image into a signed binary
// accumulator. When the last clock of the image has been added, the totals are
// latched as the scores and the index of the largest score (lowest index on a
// tie) is given as the class. The score divided by (L * NIN) estimates the
// neuron's inner product divided by NIN.
//
// Interface: acc_en marks clocks that belong to an image; done (one clock,
// with the image's last acc_en clock) ends the image. Timing: scores, class_id
// and the one-clock result_valid pulse appear the clock after done.
module output_layer
  import sc_pkg::*;
#(
  parameter int unsigned NIN  = 500,
  parameter int unsigned NCLS = 10,
  parameter int unsigned W    = 6,
  parameter int unsigned L    = 256,
  parameter int unsigned SW   = $clog2(NIN * L + 1) + 2,
  parameter int unsigned RW   = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 acc_en,
  input  logic                 done,
  input  logic [NIN-1:0]       in_bits,
  input  logic                 we,
  input  logic [RW-1:0]        wr_row,
  input  code_t                wdata [NIN],
  input  rnd_t                 rnd_w,
  output logic signed [SW-1:0] scores [NCLS],
  output logic [RW-1:0]        class_id,
  output logic                 result_valid
);

  localparam int unsigned CW = $clog2(NIN + 2);

  logic signed [SW-1:0] acc   [NCLS];
  logic signed [SW-1:0] total [NCLS];
  logic [RW-1:0]        best;

  for (genvar j = 0; j < NCLS; j++) begin : g_cls
    logic [W-1:0]   wcode [NIN];
    logic [NIN-1:0] wbits;
    logic [CW-1:0]  count;

    weight_sram #(.N(NIN), .W(W)) u_sram (
      .clk, .we(we && wr_row == RW'(j)), .wdata, .rdata(wcode)
    );

    sng #(.N(NIN), .W(W)) u_wsng (.code(wcode), .rnd(rnd_w), .bits(wbits));

    apc_inner_product #(.N(NIN), .CW(CW)) u_ip (.x(in_bits), .w(wbits), .count(count));

    assign total[j] = acc[j] + 2 * $signed(SW'(count)) - $signed(SW'(NIN));
  end

  always_comb begin
    best = '0;
    for (int j = 1; j < NCLS; j++) begin
      if (total[j] > total[best]) best = RW'(j);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      result_valid <= 1'b0;
      class_id     <= '0;
      for (int j = 0; j < NCLS; j++) begin
        acc[j]    <= '0;
        scores[j] <= '0;
      end
    end else begin
      result_valid <= acc_en && done;
      if (acc_en && done) begin
        class_id <= best;
        for (int j = 0; j < NCLS; j++) begin
          scores[j] <= total[j];
          acc[j]    <= '0;
        end
      end else if (acc_en) begin
        for (int j = 0; j < NCLS; j++) acc[j] <= total[j];
      end
    end
  end

endmodule
