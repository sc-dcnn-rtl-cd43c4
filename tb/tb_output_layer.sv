// tb_output_layer: 8 inputs, 3 classes, 16-clock images. With the weight
// random number at 0 the weight streams are exactly "code != 0", so each
// class's per-clock APC count and its accumulated score are modelled exactly;
// scores, the argmax class and the valid pulse are checked for several
// back-to-back images, and acc_en low must freeze the accumulators.
module tb_output_layer;
  localparam int NI = 8, NC = 3, L = 16;
  localparam int SW = $clog2(NI * L + 1) + 2;
  logic clk = 0, rst_n = 0, acc_en = 0, done = 0;
  logic [NI-1:0] in_bits;
  logic we = 0;
  logic [1:0] wr_row;
  logic [7:0] wdata [NI];
  logic [15:0] rnd_w;
  logic signed [SW-1:0] scores [NC];
  logic [1:0] class_id;
  logic result_valid;
  logic [NI-1:0] wb [NC];
  int acc [NC];
  int checks = 0, failures = 0;

  output_layer #(.NIN(NI), .NCLS(NC), .W(6), .L(L)) dut (
    .clk, .rst_n, .acc_en, .done, .in_bits, .we, .wr_row, .wdata, .rnd_w,
    .scores, .class_id, .result_valid);

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
    for (int j = 0; j < NC; j++) begin
      for (int i = 0; i < NI; i++) begin
        wb[j][i] = 1'($urandom);
        wdata[i] = wb[j][i] ? 8'hC0 : 8'h00;
      end
      we = 1; wr_row = 2'(j); @(negedge clk);
    end
    we = 0;
    for (int img = 0; img < 6; img++) begin
      int best;
      for (int j = 0; j < NC; j++) acc[j] = 0;
      for (int t = 0; t < L; t++) begin
        in_bits = NI'($urandom);
        acc_en = 1; done = (t == L - 1);
        for (int j = 0; j < NC; j++) acc[j] += 2 * apc_model(~(in_bits ^ wb[j])) - NI;
        @(negedge clk);
        if (img == 2 && t == 5) begin        // a gap: nothing may accumulate
          acc_en = 0; done = 0; in_bits = '1;
          @(negedge clk); @(negedge clk);
        end
        if (t < L - 1) check(!result_valid, "no early valid");
      end
      acc_en = 0; done = 0;
      check(result_valid, $sformatf("valid image %0d", img));
      best = 0;
      for (int j = 1; j < NC; j++) if (acc[j] > acc[best]) best = j;
      for (int j = 0; j < NC; j++) check(int'(scores[j]) == acc[j], $sformatf("img %0d score %0d: %0d vs %0d", img, j, scores[j], acc[j]));
      check(int'(class_id) == best, $sformatf("img %0d class", img));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
