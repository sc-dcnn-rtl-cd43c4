// tb_fc_layer: 16 inputs, 3 neurons. With the weight random number held at 0
// a weight stream is exactly "code != 0", so products are known each clock and
// the APC counts and Btanh states can be modelled exactly; the output of every
// neuron is compared with that model every clock while the input streams are
// random.
module tb_fc_layer;
  localparam int NI = 16, NO = 3, K = 8;
  logic clk = 0, rst_n = 0, init = 0;
  logic [NI-1:0] in_bits;
  logic we = 0;
  logic [1:0] wr_row;
  logic [7:0] wdata [NI];
  logic [15:0] rnd_w;
  logic [NO-1:0] out_bits;
  logic [NI-1:0] wb [NO];
  int s [NO];
  int checks = 0, failures = 0;

  fc_layer #(.NIN(NI), .NOUT(NO), .W(6), .K(K)) dut (
    .clk, .rst_n, .init, .in_bits, .we, .wr_row, .wdata, .rnd_w, .out_bits);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int apc_model(input logic [NI-1:0] p);
    int c = 0;
    for (int i = 0; i < NI / 2; i++)
      c += 2 * int'((i % 2 == 0) ? (p[2*i] | p[2*i+1]) : (p[2*i] & p[2*i+1]));
    return c;
  endfunction

  initial begin
    rnd_w = 0; in_bits = '0; wr_row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < NO; j++) begin
      for (int i = 0; i < NI; i++) begin
        wb[j][i] = (j == 0) ? 1'b1 : (j == 1) ? 1'b0 : 1'($urandom);
        wdata[i] = wb[j][i] ? 8'($urandom_range(255, 4)) : 8'($urandom_range(3, 0));
      end
      we = 1; wr_row = 2'(j); @(negedge clk);
    end
    we = 0;
    init = 1; @(negedge clk); init = 0;
    for (int j = 0; j < NO; j++) s[j] = K / 2;
    for (int t = 0; t < 3000; t++) begin
      in_bits = NI'($urandom);
      if (t < 1500) in_bits = in_bits | NI'($urandom);   // mostly ones first
      #1;
      for (int j = 0; j < NO; j++) check(out_bits[j] == (s[j] >= K / 2), $sformatf("t %0d n %0d", t, j));
      @(negedge clk);
      for (int j = 0; j < NO; j++) begin
        s[j] += 2 * apc_model(~(in_bits ^ wb[j])) - NI;
        if (s[j] < 0) s[j] = 0;
        if (s[j] > K - 1) s[j] = K - 1;
      end
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
