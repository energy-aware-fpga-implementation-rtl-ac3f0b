// tb_class_comparator: self-checking test of the class decision. For random
// spike counts of 2 and of 5 output neurons it checks the winning index
// (strictly greater count wins, ties go to the lower index), its count, and
// that done comes exactly N cycles after start (N busy cycles).
module tb_class_comparator;
  localparam int CW = 5;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start2 = 1'b0, start5 = 1'b0;
  logic [1:0][CW-1:0] counts2;
  logic [4:0][CW-1:0] counts5;
  logic busy2, done2, busy5, done5;
  logic       idx2;
  logic [2:0] idx5;
  logic [CW-1:0] best2, best5;

  always #5 clk = ~clk;

  class_comparator #(.N(2), .CW(CW)) dut2 (.clk, .rst_n, .start(start2), .counts(counts2),
    .busy(busy2), .done(done2), .class_idx(idx2), .best_count(best2));
  class_comparator #(.N(5), .CW(CW)) dut5 (.clk, .rst_n, .start(start5), .counts(counts5),
    .busy(busy5), .done(done5), .class_idx(idx5), .best_count(best5));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int best, bi, cyc;
      automatic bit use5 = t[0];
      automatic int n = use5 ? 5 : 2;
      int c [5];
      for (int j = 0; j < n; j++) c[j] = (t % 7 == 0) ? 9 : $urandom_range(25);
      best = c[0]; bi = 0;
      for (int j = 1; j < n; j++) if (c[j] > best) begin best = c[j]; bi = j; end
      @(negedge clk);
      for (int j = 0; j < 2; j++) counts2[j] = CW'(c[j]);
      for (int j = 0; j < 5; j++) counts5[j] = CW'(c[j]);
      if (use5) start5 = 1'b1; else start2 = 1'b1;
      @(negedge clk) begin start5 = 1'b0; start2 = 1'b0; end
      cyc = 1;
      while (!(use5 ? done5 : done2) && cyc < 20) begin @(negedge clk); cyc++; end
      check(cyc == n + 1, $sformatf("done after %0d cycles, N = %0d", cyc, n));
      if (use5) check(int'(idx5) == bi && int'(best5) == best, $sformatf("N=5 idx %0d ref %0d", idx5, bi));
      else      check(int'(idx2) == bi && int'(best2) == best, $sformatf("N=2 idx %0d ref %0d", idx2, bi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
