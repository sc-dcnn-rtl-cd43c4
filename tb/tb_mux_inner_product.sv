// tb_mux_inner_product: random inputs, weights and select randomness; the
// output must be XNOR of the input and weight at index floor(rnd*N/65536).
// A statistical run then checks that the output density is the scaled sum
// (1/N) sum(x_i w_i) of fixed streams.
module tb_mux_inner_product;
  localparam int N = 5;
  logic [N-1:0] x, w;
  logic [15:0]  rnd;
  logic         y;
  int checks = 0, failures = 0;
  int s, ones;

  mux_inner_product #(.N(N)) dut (.x, .w, .rnd, .y);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 2000; t++) begin
      x = N'($urandom); w = N'($urandom); rnd = 16'($urandom);
      #1;
      s = (int'(rnd) * N) / 65536;
      check(y == (x[s] ~^ w[s]), $sformatf("t %0d", t));
    end
    // products 1,1,1,0,0 -> sum of bipolar products = 1 -> P(1) = (1/5+1)/2 = 0.6
    x = 5'b00111; w = 5'b11111; ones = 0;
    for (int r = 0; r < 65536; r += 16) begin
      rnd = 16'(r); #1; ones += int'(y);
    end
    check(ones == 4096 * 3 / 5 || ones == 4096 * 3 / 5 + 1, $sformatf("density %0d", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
