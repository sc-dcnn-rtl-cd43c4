// tb_conv_pool_layer: an 8x8 single-channel input with a checkerboard of 4x4
// quadrants (bipolar +1 where (x < 4) xor (y >= 4), -1 elsewhere) and two
// filters, all +1 and all -1. With 5x5 convolution and 2x2 pooling the 2x2
// output map of filter 0 must read + - / - + and filter 1 the opposite; this
// checks the receptive-field wiring, the per-filter weight memories and the
// layer in both MUX-Avg-Stanh and APC-Avg-Btanh form.
module tb_conv_pool_layer;
  localparam int IH = 8, OC = 2, PH = 2, N = 25;
  logic clk = 0, rst_n = 0, init = 0;
  logic [IH*IH-1:0] in_bits;
  logic we = 0;
  logic [0:0] wr_row;
  logic [7:0] wdata [N];
  logic [15:0] r1, r2, r3;
  logic [OC*PH*PH-1:0] out_m, out_a;
  int checks = 0, failures = 0;
  int om [OC*PH*PH], oa [OC*PH*PH];

  conv_pool_layer #(.IN_CH(1), .IN_H(IH), .KS(5), .OUT_CH(OC), .W(7), .USE_APC(0), .K(10)) dm (
    .clk, .rst_n, .init, .in_bits, .we, .wr_row, .wdata, .rnd_w(r1), .rnd_sel(r2), .rnd_pool(r3), .out_bits(out_m));
  conv_pool_layer #(.IN_CH(1), .IN_H(IH), .KS(5), .OUT_CH(OC), .W(7), .USE_APC(1), .K(12)) da (
    .clk, .rst_n, .init, .in_bits, .we, .wr_row, .wdata, .rnd_w(r1), .rnd_sel(r2), .rnd_pool(r3), .out_bits(out_a));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_bits = '0; r1 = 0; r2 = 0; r3 = 0; wr_row = 0;
    for (int i = 0; i < N; i++) wdata[i] = 8'hFF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    we = 1; wr_row = 0; @(negedge clk);            // filter 0: all +1
    for (int i = 0; i < N; i++) wdata[i] = 8'h00;
    wr_row = 1; @(negedge clk);                     // filter 1: all -1
    we = 0;
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IH; x++) in_bits[y*IH + x] = (x < 4) ^ (y >= 4);
    init = 1; @(negedge clk); init = 0;
    for (int i = 0; i < OC*PH*PH; i++) begin om[i] = 0; oa[i] = 0; end
    for (int t = 0; t < 1024; t++) begin
      r1 = 16'($urandom); r2 = 16'($urandom); r3 = 16'($urandom);
      @(negedge clk);
      for (int i = 0; i < OC*PH*PH; i++) begin om[i] += int'(out_m[i]); oa[i] += int'(out_a[i]); end
    end
    for (int f = 0; f < OC; f++)
      for (int py = 0; py < PH; py++)
        for (int px = 0; px < PH; px++) begin
          int i;
          bit pos;
          i = f*PH*PH + py*PH + px;
          pos = ((px == 0) ^ (py == 1)) ^ (f == 1);
          check(pos ? om[i] > 800 : om[i] < 224, $sformatf("MUX map %0d (%0d,%0d): %0d", f, py, px, om[i]));
          check(pos ? oa[i] > 800 : oa[i] < 224, $sformatf("APC map %0d (%0d,%0d): %0d", f, py, px, oa[i]));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
