// tb_avg_pool_bin: mean of four counts with the fraction dropped, including
// the (2, 3, 4, 5) -> 3 example and the all-maximum case.
module tb_avg_pool_bin;
  localparam int CW = 10;
  logic [CW-1:0] in [4];
  logic [CW-1:0] avg;
  int checks = 0, failures = 0;

  avg_pool_bin #(.CW(CW)) dut (.in, .avg);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    in = '{10'd2, 10'd3, 10'd4, 10'd5}; #1;
    check(avg == 3, "mean of 2,3,4,5");
    in = '{10'd1023, 10'd1023, 10'd1023, 10'd1023}; #1;
    check(avg == 1023, "max");
    for (int t = 0; t < 2000; t++) begin
      int s;
      s = 0;
      for (int i = 0; i < 4; i++) begin in[i] = CW'($urandom); s += int'(in[i]); end
      #1;
      check(int'(avg) == s / 4, $sformatf("t %0d", t));
    end
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
