// tb_sc_dcnn_lenet5: end-to-end test of the whole network at reduced size
// (16x16 image, 2 and 4 feature maps, 4 hidden and 3 output neurons, 64-bit
// streams), built twice: the default average-pooling configuration
// (MUX-Avg-Stanh, APC-Avg-Btanh, APC-Btanh) and a max-pooling configuration
// with APC in every layer (APC-Max-Btanh throughout).
//
// All hidden weights are +1; class 0 has weights +1, class 1 weights -1 and
// class 2 weights 0. A white image (+1 everywhere) must then propagate +1
// through every layer, so class 0 wins with a large positive score and class
// 1 gets a large negative one; a black image (-1) must flip every sign and
// make class 1 win. The two images are sent back to back with start held
// high, so the second is accepted in the last clock of the first. Checked:
// classes, score signs and sizes, latency (L + 4 clocks from acceptance to
// the result) and one result per L clocks. Each mechanism (weight load into
// each of the four layers, back-to-back acceptance, a start ignored while
// busy, both pooling modes producing results) is counted and must occur.
module tb_sc_dcnn_lenet5;
  import sc_pkg::*;
  localparam int IMG = 16, C0 = 2, C1 = 4, F2 = 4, NCLS = 3, L = 64;
  localparam int NPIX = IMG * IMG;
  localparam int ROWMAX = 50;                   // C0 * 5 * 5
  localparam int SW = $clog2(F2 * L + 1) + 2;
  localparam int RWMAX = $clog2(F2 + 1);
  localparam int CLSW = $clog2(NCLS);

  logic clk = 0, rst_n = 0, start = 0;
  logic ready_a, ready_m;
  code_t pixels [NPIX];
  logic wr_en = 0;
  layer_e wr_layer;
  logic [RWMAX-1:0] wr_row;
  code_t wr_data [ROWMAX];
  logic valid_a, valid_m;
  logic signed [SW-1:0] scores_a [NCLS], scores_m [NCLS];
  logic [CLSW-1:0] class_a, class_m;

  sc_dcnn_lenet5 #(.IMG(IMG), .C0(C0), .C1(C1), .F2(F2), .NCLS(NCLS), .L(L)) dut_avg (
    .clk, .rst_n, .start, .ready(ready_a), .pixels, .wr_en, .wr_layer, .wr_row, .wr_data,
    .result_valid(valid_a), .scores(scores_a), .class_id(class_a));

  sc_dcnn_lenet5 #(.IMG(IMG), .C0(C0), .C1(C1), .F2(F2), .NCLS(NCLS), .L(L),
                   .L0_APC(1), .L1_APC(1), .POOL_MAX(1)) dut_max (
    .clk, .rst_n, .start, .ready(ready_m), .pixels, .wr_en, .wr_layer, .wr_row, .wr_data,
    .result_valid(valid_m), .scores(scores_m), .class_id(class_m));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  int acc_cycle [$];
  int n_res_a = 0, n_res_m = 0, n_back_to_back = 0, n_ignored = 0;
  int n_wr [4] = '{0, 0, 0, 0};
  int last_res_cycle = -1;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // acceptance log and mechanism counters, sampled at each rising edge
  always @(posedge clk) if (rst_n) begin
    if (start && ready_a) begin
      acc_cycle.push_back(cycle);
      if (acc_cycle.size() > 1) n_back_to_back++;
    end
    if (start && !ready_a) n_ignored++;
    if (wr_en) n_wr[int'(wr_layer)]++;
  end

  // expected class per image: white -> 0, black -> 1
  int expect_cls [2] = '{0, 1};

  always @(posedge clk) if (rst_n) begin
    if (valid_a) begin
      int k;
      k = n_res_a;
      check(k < 2, "extra result");
      if (k < 2) begin
        check(cycle - acc_cycle[k] == L + 4, $sformatf("latency %0d", cycle - acc_cycle[k]));
        check(int'(class_a) == expect_cls[k], $sformatf("avg image %0d class %0d", k, class_a));
        if (k == 0) begin
          check(int'(scores_a[0]) > F2 * L / 2, $sformatf("avg white score0 %0d", scores_a[0]));
          check(int'(scores_a[1]) < -F2 * L / 2, $sformatf("avg white score1 %0d", scores_a[1]));
        end else begin
          check(int'(scores_a[1]) > F2 * L / 2, $sformatf("avg black score1 %0d", scores_a[1]));
          check(int'(scores_a[0]) < -F2 * L / 2, $sformatf("avg black score0 %0d", scores_a[0]));
          check(cycle - last_res_cycle == L, $sformatf("result spacing %0d", cycle - last_res_cycle));
        end
        // class 2 (weights 0) must stay small compared with the winner
        for (int j = 2; j < NCLS; j++) check(int'(scores_a[j]) < F2 * L / 2 && int'(scores_a[j]) > -F2 * L / 2, "avg zero-weight class small");
      end
      last_res_cycle = cycle;
      n_res_a++;
    end
    if (valid_m) begin
      if (n_res_m < 2) begin
        check(int'(class_m) == expect_cls[n_res_m], $sformatf("max image %0d class %0d", n_res_m, class_m));
        check(int'(scores_m[expect_cls[n_res_m]]) > F2 * L / 2, "max winner score");
      end
      n_res_m++;
    end
  end

  task automatic write_row(input layer_e lay, input int row, input code_t v);
    @(negedge clk);
    wr_en = 1; wr_layer = lay; wr_row = RWMAX'(row);
    for (int i = 0; i < ROWMAX; i++) wr_data[i] = v;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    wr_layer = LAYER0; wr_row = 0;
    for (int i = 0; i < ROWMAX; i++) wr_data[i] = '0;
    for (int i = 0; i < NPIX; i++) pixels[i] = 8'hFF;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < C0; f++) write_row(LAYER0, f, 8'hFF);
    for (int f = 0; f < C1; f++) write_row(LAYER1, f, 8'hFF);
    for (int j = 0; j < F2; j++) write_row(LAYER2, j, 8'hFF);
    for (int j = 0; j < NCLS; j++) write_row(LAYER_OUT, j, j == 0 ? 8'hFF : j == 1 ? 8'h00 : 8'h80);
    // white image, then black image back to back (start held high)
    @(negedge clk);
    start = 1;
    @(negedge clk);
    for (int i = 0; i < NPIX; i++) pixels[i] = 8'h00;
    wait (acc_cycle.size() == 2);
    @(negedge clk);
    start = 0;
    repeat (2 * L + 20) @(negedge clk);
    check(n_res_a == 2 && n_res_m == 2, $sformatf("results %0d %0d", n_res_a, n_res_m));
    check(n_back_to_back >= 1, "back-to-back acceptance happened");
    check(n_ignored >= 1, "start while busy happened");
    for (int k = 0; k < 4; k++) check(n_wr[k] >= 1, $sformatf("weight load layer %0d", k));
    check(n_res_m >= 1, "max-pooling mode ran");
    $display("mechanisms: back_to_back=%0d start_ignored=%0d writes=%0d/%0d/%0d/%0d results avg=%0d max=%0d",
             n_back_to_back, n_ignored, n_wr[0], n_wr[1], n_wr[2], n_wr[3], n_res_a, n_res_m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
