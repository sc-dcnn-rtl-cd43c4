// tb_avg_pool_mux: output must be input number rnd[15:14]; over all selects
// the output density equals the mean of the four input densities.
module tb_avg_pool_mux;
  logic [3:0]  in;
  logic [15:0] rnd;
  logic        y;
  int checks = 0, failures = 0;
  int ones;

  avg_pool_mux dut (.in, .rnd, .y);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 1000; t++) begin
      in = 4'($urandom); rnd = 16'($urandom);
      #1;
      check(y == in[rnd >> 14], $sformatf("t %0d", t));
    end
    in = 4'b1011; ones = 0;
    for (int r = 0; r < 65536; r += 64) begin
      rnd = 16'(r); #1; ones += int'(y);
    end
    check(ones == 768, $sformatf("density %0d", ones));
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
