// tb_max_pool: runs the stream version (DW=1) and the accumulator version
// (DW=6) side by side against a cycle model written from the description:
// per-segment sums, comparison at the segment's last clock, selection used for
// the whole next segment, random first choice at start. Also checks that with
// one clearly largest input the selection settles on it, and that the output
// density approaches that input's density.
module tb_max_pool;
  localparam int C = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] rnd;
  logic [0:0] in1 [4];
  logic [5:0] in6 [4];
  logic [0:0] y1;
  logic [5:0] y6;
  logic [1:0] sel1, sel6;
  int checks = 0, failures = 0;
  int m_sel1, m_sel6, pos;
  int acc1 [4], acc6 [4];
  int ones, picked;
  real p [4] = '{0.3, 0.5, 0.8, 0.4};

  max_pool #(.DW(1), .C(C)) d1 (.clk, .rst_n, .start, .rnd, .in(in1), .y(y1), .sel(sel1));
  max_pool #(.DW(6), .C(C)) d6 (.clk, .rst_n, .start, .rnd, .in(in6), .y(y6), .sel(sel6));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic int argmax(input int a [4]);
    int b = 0;
    for (int i = 1; i < 4; i++) if (a[i] > a[b]) b = i;
    return b;
  endfunction

  initial begin
    rnd = 16'hC000;
    for (int i = 0; i < 4; i++) begin in1[i] = '0; in6[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    m_sel1 = 3; m_sel6 = 3; pos = 0;   // random first choice from rnd[15:14] = 3
    for (int i = 0; i < 4; i++) begin acc1[i] = 0; acc6[i] = 0; end
    ones = 0; picked = 0;
    for (int t = 0; t < 4096; t++) begin
      for (int i = 0; i < 4; i++) begin
        in1[i] = ($urandom % 1000) < int'(p[i] * 1000.0);
        in6[i] = 6'(($urandom % 20) + (i == 1 ? 12 : 0));
      end
      rnd = 16'($urandom);
      #1;
      check(sel1 == 2'(m_sel1) && y1 == in1[m_sel1], $sformatf("stream t %0d", t));
      check(sel6 == 2'(m_sel6) && y6 == in6[m_sel6], $sformatf("acc t %0d", t));
      ones += int'(y1);
      if (t >= 64) picked += int'(sel1 == 2);
      for (int i = 0; i < 4; i++) begin acc1[i] += int'(in1[i]); acc6[i] += int'(in6[i]); end
      if (pos == C - 1) begin
        m_sel1 = argmax(acc1); m_sel6 = argmax(acc6);
        for (int i = 0; i < 4; i++) begin acc1[i] = 0; acc6[i] = 0; end
        pos = 0;
      end else pos++;
      @(negedge clk);
    end
    check(picked > 3700, $sformatf("largest input chosen %0d of 4032", picked));
    check(ones > 3000 && ones < 3500, $sformatf("output density %0d / 4096", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
