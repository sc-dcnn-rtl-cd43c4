// tb_btanh: cycle model of the saturating counter (state += 2v - N, clamp to
// [0, K-1], output state >= K/2) for N = 500, K = 250 with random counts, and
// the init behaviour.
module tb_btanh;
  localparam int N = 500, K = 250;
  logic clk = 0, rst_n = 0, init = 0;
  logic [8:0] v;
  logic y;
  int checks = 0, failures = 0;
  int s;

  btanh #(.N(N), .K(K)) dut (.clk, .rst_n, .init, .v, .y);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    v = 250;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    s = K / 2;
    for (int t = 0; t < 5000; t++) begin
      // counts around N/2 with a drift that changes sign every 1000 clocks
      v = 9'(230 + ($urandom % 41) + ((t / 1000) % 2 == 0 ? 3 : -3));
      if (t % 700 == 699) init = 1;
      #1;
      check(y == (s >= K / 2), $sformatf("t %0d state %0d", t, s));
      @(negedge clk);
      if (init) begin s = K / 2; init = 0; end
      else begin
        s = s + 2 * int'(v) - N;
        if (s < 0) s = 0;
        if (s > K - 1) s = K - 1;
      end
    end
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
