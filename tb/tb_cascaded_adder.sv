// tb_cascaded_adder: self-checking test of the multiplexer + adder tree at its
// full size (4096 inputs, 16-bit weights, 28-bit sum).
//
// Random spike vectors of several densities and random Q1.15 weights are
// applied; the expected sum is a plain loop over the selected weights. The
// extreme cases (every weight +max or -1 with every input spiking, no input
// spiking) check that 28 bits hold any sum without overflow.
module tb_cascaded_adder;
  localparam int N = 4096, W_W = 16, SUM_W = 28;

  int checks = 0, failures = 0;
  logic [N-1:0]           in_spikes;
  logic [N-1:0][W_W-1:0]  in_weights;
  logic signed [SUM_W-1:0] sum;

  cascaded_adder #(.N(N), .W_W(W_W), .SUM_W(SUM_W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  function automatic longint ref_sum();
    longint acc = 0;
    for (int i = 0; i < N; i++)
      if (in_spikes[i]) acc += longint'($signed(in_weights[i]));
    return acc;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // extremes
    in_spikes = '1;
    for (int i = 0; i < N; i++) in_weights[i] = 16'h7FFF;
    #1 check(longint'(sum) == 64'(N) * 32767, $sformatf("all max: %0d", sum));
    for (int i = 0; i < N; i++) in_weights[i] = 16'h8000;
    #1 check(longint'(sum) == -64'(N) * 32768, $sformatf("all min: %0d", sum));
    in_spikes = '0;
    #1 check(sum == '0, "no spikes must give 0");
    // one spike at a time selects exactly one weight
    for (int i = 0; i < N; i++) in_weights[i] = W_W'(i * 7 - 9000);
    for (int t = 0; t < 50; t++) begin
      automatic int k = $urandom_range(N - 1);
      in_spikes = '0;
      in_spikes[k] = 1'b1;
      #1 check(longint'(sum) == longint'($signed(in_weights[k])), $sformatf("single spike %0d", k));
    end
    // random vectors of several densities
    for (int t = 0; t < 60; t++) begin
      automatic int dens = (t % 4) * 33 + 1;  // percent of spiking inputs
      for (int i = 0; i < N; i++) begin
        in_weights[i] = W_W'($urandom);
        in_spikes[i]  = ($urandom_range(99) < dens);
      end
      #1 check(longint'(sum) == ref_sum(), $sformatf("random %0d: dut %0d ref %0d", t, sum, ref_sum()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
