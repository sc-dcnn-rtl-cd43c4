// tb_stanh: cycle model of the K-state machine (up on 1, down on 0,
// saturating, output 1 at or above the threshold) for K=10 with threshold
// K/2 and K=12 with threshold K/5; then checks the transfer curve against
// tanh(K/2 x) at a few input values within a loose tolerance.
module tb_stanh;
  logic clk = 0, rst_n = 0, init = 0, in;
  logic ya, yb;
  int checks = 0, failures = 0;
  int sa, sb;

  stanh #(.K(10))              da (.clk, .rst_n, .init, .in, .y(ya));
  stanh #(.K(12), .THRESH(2))  db (.clk, .rst_n, .init, .in, .y(yb));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    sa = 5; sb = 6;
    for (int t = 0; t < 5000; t++) begin
      in = ($urandom % 100) < (t < 2500 ? 55 : 30);
      if (t == 3000) init = 1;
      #1;
      check(ya == (sa >= 5), $sformatf("K10 t %0d", t));
      check(yb == (sb >= 2), $sformatf("K12 t %0d", t));
      @(negedge clk);
      if (init) begin sa = 5; sb = 6; init = 0; end
      else begin
        if (in) begin if (sa < 9) sa++; if (sb < 11) sb++; end
        else    begin if (sa > 0) sa--; if (sb > 0) sb--; end
      end
    end
    // transfer curve, K = 10: Stanh(K, x) ~ tanh(5 x)
    foreach (sa_x[i]) begin
      int ones;
      ones = 0;
      for (int t = 0; t < 20000; t++) begin
        in = ($urandom % 10000) < int'((sa_x[i] + 1.0) / 2.0 * 10000.0);
        #1; ones += int'(ya);
        @(negedge clk);
      end
      check(((2.0 * ones / 20000.0 - 1.0) - $tanh(5.0 * sa_x[i])) < 0.15 &&
            ((2.0 * ones / 20000.0 - 1.0) - $tanh(5.0 * sa_x[i])) > -0.15,
            $sformatf("tanh at %f: %f", sa_x[i], 2.0 * ones / 20000.0 - 1.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  real sa_x [4] = '{-0.5, -0.1, 0.1, 0.5};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
