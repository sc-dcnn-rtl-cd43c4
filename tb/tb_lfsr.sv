// tb_lfsr: checks the LFSR against an independently written shift/feedback
// model for 70000 steps, checks the reset value, that en=0 holds the value,
// and that the sequence returns to its seed after exactly 65535 steps.
module tb_lfsr;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] rnd, model;
  int checks = 0, failures = 0;
  int period = 0;

  lfsr #(.SEED(16'h1234)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check(rnd == 16'h1234, "reset value");
    model = 16'h1234;
    en = 0;
    @(negedge clk);
    check(rnd == 16'h1234, "hold when en=0");
    en = 1;
    for (int i = 1; i <= 70000; i++) begin
      @(negedge clk);
      // feedback taps 16, 14, 13, 11 (bits 15, 13, 12, 10)
      model = {model[14:0], model[15] ^ model[13] ^ model[12] ^ model[10]};
      if (i < 2000 || i % 97 == 0) check(rnd == model, $sformatf("step %0d", i));
      if (period == 0 && rnd == 16'h1234) period = i;
      if (rnd == 0) check(0, "all-zero state");
    end
    check(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
