// tb_apc: compares the 16-input APC with a gate-level model of the counter
// drawn in the source: OR/AND on the eight input pairs, then four full adders
// whose outputs carry the weights 2^3, 2^2, 2^1 and 2^1. Also checks a 7-input
// counter (odd size) against 2*(gate sum) + last input, and the average
// error of the approximation on random inputs.
module tb_apc;
  logic [15:0] in16;
  logic [4:0]  c16;
  logic [6:0]  in7;
  logic [3:0]  c7;
  int checks = 0, failures = 0;
  real err;

  apc #(.N(16)) dut16 (.in(in16), .count(c16));
  apc #(.N(7))  dut7  (.in(in7),  .count(c7));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int fig7(input logic [15:0] a);
    logic [7:0] g;
    logic s1, c1, s2, c2, s3, c3, s4, c4;
    for (int i = 0; i < 8; i += 2) begin
      g[i]   = a[2*i] | a[2*i+1];
      g[i+1] = a[2*i+2] & a[2*i+3];
    end
    s1 = g[0] ^ g[1] ^ g[2]; c1 = (g[0] & g[1]) | (g[0] & g[2]) | (g[1] & g[2]);
    s2 = g[3] ^ g[4] ^ g[5]; c2 = (g[3] & g[4]) | (g[3] & g[5]) | (g[4] & g[5]);
    s3 = s1 ^ s2 ^ g[6];     c3 = (s1 & s2) | (s1 & g[6]) | (s2 & g[6]);
    s4 = c1 ^ c2 ^ c3;       c4 = (c1 & c2) | (c1 & c3) | (c2 & c3);
    return 8 * int'(c4) + 4 * int'(s4) + 2 * int'(s3) + 2 * int'(g[7]);
  endfunction

  initial begin
    err = 0;
    for (int t = 0; t < 65536; t++) begin
      in16 = 16'(t);
      #1;
      if (t % 7 == 0) check(int'(c16) == fig7(in16), $sformatf("in %h", in16));
      begin
        int n1;
        n1 = $countones(in16);
        err += real'(int'(c16) - n1);
      end
    end
    // averaged over all inputs the approximation is unbiased
    check(err == 0.0, $sformatf("bias %f", err));
    for (int t = 0; t < 128; t++) begin
      int g;
      in7 = 7'(t);
      #1;
      g = (in7[0] | in7[1]) + (in7[2] & in7[3]) + (in7[4] | in7[5]);
      check(int'(c7) == 2 * g + int'(in7[6]), $sformatf("in7 %h", in7));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
