// tb_apc_inner_product: random 25-wide input and weight words; the count must
// equal the APC rule applied to the XNOR products, modelled here directly.
module tb_apc_inner_product;
  localparam int N = 25;
  logic [N-1:0] x, w, p;
  logic [4:0]   count;
  int checks = 0, failures = 0;
  int exp_c;

  apc_inner_product #(.N(N)) dut (.x, .w, .count);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      x = N'($urandom); w = N'($urandom);
      if (t == 0) begin x = '1; w = '1; end
      if (t == 1) begin x = '1; w = '0; end
      #1;
      exp_c = 0;
      for (int i = 0; i < 12; i++) begin
        logic a, b;
        a = (x[2*i] == w[2*i]);
        b = (x[2*i+1] == w[2*i+1]);
        exp_c += 2 * int'((i % 2 == 0) ? (a | b) : (a & b));
      end
      exp_c += int'(x[24] == w[24]);
      check(int'(count) == exp_c, $sformatf("t %0d got %0d exp %0d", t, count, exp_c));
      if (t == 0) check(count == 25, "all products one");
      if (t == 1) check(count == 0, "all products zero");
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
