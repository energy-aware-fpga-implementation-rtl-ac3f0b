// tb_output_memory: self-checking test of the output spike store. Feeds 25
// time steps of random spikes of 2 output neurons (one neuron per cycle),
// checks the per-step spike vector and the spike counts against counts kept
// here, checks saturation of the counters and clear.
module tb_output_memory;
  localparam int N = 2, T_STEPS = 25, CW = $clog2(T_STEPS + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, shift_en = 1'b0, spike_in = 1'b0;
  logic in_idx = 1'b0;
  logic [N-1:0] out_vec;
  logic [N-1:0][CW-1:0] counts;
  int cnt_ref [N];

  always #5 clk = ~clk;

  output_memory #(.N(N), .T_STEPS(T_STEPS)) dut (.*);

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
    logic [N-1:0] step_sp;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk) clear = 1'b1;
      @(negedge clk) clear = 1'b0;
      foreach (cnt_ref[i]) cnt_ref[i] = 0;
      check(counts == '0 && out_vec == '0, "clear");
      for (int t = 0; t < T_STEPS + 10; t++) begin   // 10 extra steps: counters saturate
        for (int j = 0; j < N; j++) begin
          step_sp[j] = (rep == 2) ? 1'b1 : 1'($urandom);
          @(negedge clk);
          shift_en = 1'b1; in_idx = 1'(j); spike_in = step_sp[j];
          if (step_sp[j] && cnt_ref[j] < (1 << CW) - 1) cnt_ref[j]++;
        end
        @(negedge clk) shift_en = 1'b0; spike_in = 1'b1;
        check(out_vec == step_sp, $sformatf("step vector %0d", t));
        for (int j = 0; j < N; j++)
          check(int'(counts[j]) == cnt_ref[j], $sformatf("count %0d: %0d vs %0d", j, counts[j], cnt_ref[j]));
      end
    end
    check(int'(counts[0]) == (1 << CW) - 1, "counter saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
