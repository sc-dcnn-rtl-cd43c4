// tb_weight_sram: writes whole filters of random 8-bit codes and checks that
// every word reads back as the code's top W bits, the paper's mapping
// Int((x+1)/2*2^W); writes with we=0 must leave the contents unchanged.
module tb_weight_sram;
  localparam int N = 25, W = 7;
  logic clk = 0, we = 0;
  logic [7:0]   wdata [N];
  logic [W-1:0] rdata [N];
  logic [7:0]   last  [N];
  int checks = 0, failures = 0;

  weight_sram #(.N(N), .W(W)) dut (.clk, .we, .wdata, .rdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) wdata[i] = 8'($urandom);
      we = (t % 4 != 3);
      @(posedge clk); #1;
      if (we) for (int i = 0; i < N; i++) last[i] = wdata[i];
      we = 0;
      if (t > 0 || (t % 4 != 3))
        for (int i = 0; i < N; i++)
          check(int'(rdata[i]) == int'(last[i]) / 2, $sformatf("t %0d word %0d", t, i));
    end
    // the mapping for a few real-valued weights: x -> Int((x+1)/2*128)
    begin
      real xs [4] = '{-1.0, -0.3, 0.25, 0.99};
      for (int k = 0; k < 4; k++) begin
        for (int i = 0; i < N; i++) wdata[i] = 8'(int'($floor((xs[k] + 1.0) / 2.0 * 256.0)));
        we = 1; @(posedge clk); #1; we = 0;
        check(int'(rdata[0]) == int'($floor((xs[k] + 1.0) / 2.0 * 128.0)), $sformatf("mapping x=%f", xs[k]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
