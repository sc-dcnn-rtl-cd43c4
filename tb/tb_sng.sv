// tb_sng: drives random codes and random numbers, compares every lane with
// "MSBs of random < code", and checks that over all 256 values of the random
// byte each lane produces exactly code ones.
module tb_sng;
  localparam int N = 4, W = 8;
  logic [W-1:0] code [N];
  logic [15:0]  rnd;
  logic [N-1:0] bits;
  int checks = 0, failures = 0;
  int ones [N];

  sng #(.N(N), .W(W)) dut (.code, .rnd, .bits);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < N; i++) code[i] = W'($urandom);
      rnd = 16'($urandom);
      #1;
      for (int i = 0; i < N; i++)
        check(bits[i] == (int'(rnd[15:8]) < int'(code[i])), $sformatf("lane %0d t %0d", i, t));
    end
    code[0] = 0; code[1] = 1; code[2] = 128; code[3] = 255;
    for (int i = 0; i < N; i++) ones[i] = 0;
    for (int r = 0; r < 256; r++) begin
      rnd = {8'(r), 8'($urandom)};
      #1;
      for (int i = 0; i < N; i++) ones[i] += int'(bits[i]);
    end
    for (int i = 0; i < N; i++) check(ones[i] == int'(code[i]), $sformatf("density lane %0d = %0d", i, ones[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
