// tb_spike_shift_register: self-checking test of the serial-to-parallel spike
// buffer. Shifts in random spike sequences (with idle cycles between) and
// checks that after N shifts bit j holds the j-th spike, that idle cycles
// hold the contents, and that clear empties it.
module tb_spike_shift_register;
  localparam int N = 512;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, shift_en = 1'b0, spike_in = 1'b0;
  logic [N-1:0] out_vec, expect_vec;

  always #5 clk = ~clk;

  spike_shift_register #(.N(N)) dut (.*);

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
    #1 check(out_vec == '0, "reset");
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int j = 0; j < N; j++) expect_vec[j] = 1'($urandom);
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        shift_en = 1'b1; spike_in = expect_vec[j];
        if ($urandom_range(7) == 0) begin
          @(negedge clk) shift_en = 1'b0; spike_in = ~spike_in;
        end
      end
      @(negedge clk) shift_en = 1'b0;
      check(out_vec == expect_vec, $sformatf("pass %0d", rep));
      repeat (3) @(negedge clk);
      check(out_vec == expect_vec, "hold");
    end
    clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    check(out_vec == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
