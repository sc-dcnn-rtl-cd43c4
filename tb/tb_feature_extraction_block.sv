// tb_feature_extraction_block: builds all four configurations (MUX/APC adder x
// average/max pooling) with N = 25 and feeds them the same stochastic inputs.
// Receptive fields carry a positive inner product in phase A and a negative
// one in phase B; every configuration must output mostly ones in A and mostly
// zeros in B. A pooling window whose four inner products differ in sign also
// separates max from average pooling: max must stay positive where the
// average is negative. The state numbers of the source's formulas (Eq. 1 and
// Eq. 2 for N = 25, L = 256) are recomputed here and compared with the
// values the design uses.
module tb_feature_extraction_block;
  localparam int N = 25;
  logic clk = 0, rst_n = 0, init = 0;
  logic [N-1:0] x [4];
  logic [N-1:0] w;
  logic [15:0] rnd_sel, rnd_pool;
  logic [3:0] y;
  int checks = 0, failures = 0;
  int ones [4];
  real px [4];

  feature_extraction_block #(.N(N), .USE_APC(0), .USE_MAX(0), .K(10)) d0 (.clk, .rst_n, .init, .x, .w, .rnd_sel, .rnd_pool, .y(y[0]));
  feature_extraction_block #(.N(N), .USE_APC(0), .USE_MAX(1), .K(12)) d1 (.clk, .rst_n, .init, .x, .w, .rnd_sel, .rnd_pool, .y(y[1]));
  feature_extraction_block #(.N(N), .USE_APC(1), .USE_MAX(0), .K(12)) d2 (.clk, .rst_n, .init, .x, .w, .rnd_sel, .rnd_pool, .y(y[2]));
  feature_extraction_block #(.N(N), .USE_APC(1), .USE_MAX(1), .K(12)) d3 (.clk, .rst_n, .init, .x, .w, .rnd_sel, .rnd_pool, .y(y[3]));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int nearest_even(input real v);
    return 2 * int'($floor(v / 2.0 + 0.5));
  endfunction

  // run T clocks with field q carrying bipolar value px[q] in every input and
  // weights fixed at +1; returns ones per configuration in ones[]
  task automatic run(input int T);
    for (int i = 0; i < 4; i++) ones[i] = 0;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int t = 0; t < T; t++) begin
      for (int q = 0; q < 4; q++)
        for (int i = 0; i < N; i++) x[q][i] = ($urandom % 10000) < int'((px[q] + 1.0) / 2.0 * 10000.0);
      w = '1;
      rnd_sel = 16'($urandom); rnd_pool = 16'($urandom);
      @(negedge clk);
      for (int i = 0; i < 4; i++) ones[i] += int'(y[i]);
    end
  endtask

  initial begin
    real k1, k2, l2n;
    l2n = $ln(25.0) / $ln(2.0);
    k1 = 2.0 * l2n + (8.0 * 25.0) / (33.27 * l2n);
    k2 = 2.0 * (l2n + 8.0) - 37.0 / l2n - 16.5 / ($ln(256.0) / $ln(5.0));
    check(nearest_even(k1) == 10, $sformatf("Eq.1 K = %f", k1));
    check(nearest_even(k2) == 12, $sformatf("Eq.2 K = %f", k2));

    for (int q = 0; q < 4; q++) x[q] = '0;
    w = '0; rnd_sel = '0; rnd_pool = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    px = '{0.6, 0.5, 0.7, 0.6};
    run(1024);
    for (int i = 0; i < 4; i++) check(ones[i] > 800, $sformatf("positive, config %0d: %0d", i, ones[i]));
    px = '{-0.6, -0.5, -0.7, -0.6};
    run(1024);
    for (int i = 0; i < 4; i++) check(ones[i] < 224, $sformatf("negative, config %0d: %0d", i, ones[i]));
    // one strongly positive field among three negative ones
    px = '{-0.4, 0.8, -0.4, -0.4};
    run(1024);
    check(ones[0] < 400, $sformatf("avg MUX mixed: %0d", ones[0]));
    check(ones[1] > 800, $sformatf("max MUX mixed: %0d", ones[1]));
    check(ones[2] < 400, $sformatf("avg APC mixed: %0d", ones[2]));
    check(ones[3] > 800, $sformatf("max APC mixed: %0d", ones[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
