// tb_lif_unit: self-checking test of the time-multiplexed LIF neuron unit.
//
// Eight neurons are updated in random order with random adder sums and
// biases under several settings of threshold, resting potential, leak shift
// and refractory enable. A reference model written here keeps every
// neuron's potential and refractory count and predicts potential, spike,
// saturation and suppression of each update. The test also counts that
// spikes, saturation at both ends, refractory suppression and the clear all
// occurred.
module tb_lif_unit;
  import snn_pkg::*;
  localparam int N = 8, SUM_W = 28, REFRAC = 5;

  int checks = 0, failures = 0;
  int n_spike = 0, n_sat_hi = 0, n_sat_lo = 0, n_blocked = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  lif_cfg_t cfg;
  logic in_valid = 1'b0;
  logic [2:0] in_idx = '0;
  logic signed [SUM_W-1:0] in_sum = '0;
  logic signed [15:0] in_bias = '0;
  logic out_spike, out_sat, out_blocked;
  logic signed [15:0] out_u;

  int u_ref [N];
  int r_ref [N];

  always #5 clk = ~clk;

  lif_unit #(.N(N), .SUM_W(SUM_W), .REFRAC(REFRAC)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic update(input int idx, input int s, input int b);
    longint v;
    int un;
    bit fire, blk, sp;
    @(negedge clk);
    in_valid = 1'b1; in_idx = 3'(idx); in_sum = SUM_W'(s); in_bias = 16'(b);
    v = longint'(u_ref[idx] >>> cfg.beta_shift) + s + b - int'(cfg.u_rest);
    un = (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
    fire = un >= int'(cfg.threshold);
    blk = fire && cfg.refrac_en && r_ref[idx] != 0;
    sp = fire && !blk;
    #1;
    check(int'(out_u) == un, $sformatf("n%0d u dut %0d ref %0d", idx, out_u, un));
    check(out_spike == sp, $sformatf("n%0d spike dut %0b ref %0b", idx, out_spike, sp));
    check(out_sat == (v != longint'(un)), $sformatf("n%0d sat", idx));
    check(out_blocked == blk, $sformatf("n%0d blocked", idx));
    n_spike += int'(sp); n_blocked += int'(blk);
    n_sat_hi += int'(v > 32767); n_sat_lo += int'(v < -32768);
    u_ref[idx] = sp ? 0 : un;
    if (!cfg.refrac_en) r_ref[idx] = 0;
    else if (sp) r_ref[idx] = REFRAC;
    else if (r_ref[idx] != 0) r_ref[idx]--;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (u_ref[i]) begin u_ref[i] = 0; r_ref[i] = 0; end
    cfg = '{threshold: 16'sd16384, u_rest: 16'sd0, beta_shift: 4'd1, refrac_en: 1'b0};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // hand-worked case: neuron 3, beta = 1/2, threshold 0.5
    update(3, 10000, 0);     // U = 10000
    update(3, 10000, 0);     // U = 5000 + 10000 = 15000, below 16384
    update(3, 10000, 0);     // U = 7500 + 10000 = 17500, spike, reset to 0
    check(u_ref[3] == 0 && n_spike == 1, "hand-worked spike sequence");
    // random phases under different settings
    for (int ph = 0; ph < 8; ph++) begin
      cfg.threshold  = 16'($urandom_range(32767, 2000));
      cfg.u_rest     = 16'($signed($urandom_range(2000)) - 1000);
      cfg.beta_shift = 4'(ph % 5);
      cfg.refrac_en  = ph[0];
      for (int t = 0; t < 400; t++) begin
        int s = $signed($urandom_range(80000)) - 30000;
        if (t % 50 == 7) s = 2000000;      // drive to positive saturation
        if (t % 50 == 9) s = -2000000;     // and negative saturation
        update($urandom_range(N - 1), s, $signed($urandom_range(4000)) - 2000);
      end
    end
    // refractory: constant strong drive on one neuron, spike every 6th step
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    foreach (u_ref[i]) begin u_ref[i] = 0; r_ref[i] = 0; end
    cfg = '{threshold: 16'sd1000, u_rest: 16'sd0, beta_shift: 4'd0, refrac_en: 1'b1};
    begin
      int sp_count;
      sp_count = n_spike;
      for (int t = 0; t < 24; t++) update(5, 2000, 0);
      sp_count = n_spike - sp_count;
      check(sp_count == 4, $sformatf("refractory: %0d spikes in 24 steps, expected 4", sp_count));
    end
    // clear zeroes all potentials
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    foreach (u_ref[i]) begin u_ref[i] = 0; r_ref[i] = 0; end
    cfg = '{threshold: 16'sd32767, u_rest: 16'sd0, beta_shift: 4'd0, refrac_en: 1'b0};
    for (int i = 0; i < N; i++) update(i, 0, 0);
    check(n_spike > 0 && n_blocked > 0 && n_sat_hi > 0 && n_sat_lo > 0,
          $sformatf("mechanisms: spike %0d blocked %0d sat+ %0d sat- %0d",
                    n_spike, n_blocked, n_sat_hi, n_sat_lo));
    $display("spikes %0d blocked %0d sat+ %0d sat- %0d", n_spike, n_blocked, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
