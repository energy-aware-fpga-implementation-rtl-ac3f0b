// Body shared by the end-to-end testbenches of snn_top. The including module
// defines IMG, NU_L2, NU_L3, T_STEPS, REFRAC, WATCHDOG, the workload settings
// USED_PIX (pixels that carry the image; the rest are black with zero
// weights), HID_BETA and OUT_BETA (leak shifts), U_REST (hidden resting
// potential), and a macro SNN_TOP_INST that instantiates the design with the
// signals declared here.
//
// The test loads random weights and biases through the load port, then runs
// two complete inferences of one random grey image (black, white and grey
// pixels), the first with the refractory period enabled and the second
// without. A reference model written here (rate coder with its own LFSR,
// plain loops for the weighted sums, LIF equation, argmax) predicts every
// hidden and output neuron update, the spike counts and the class. It checks
// the cycle count of every inference, and counts the mechanisms that must
// occur: hidden and output spikes, saturation of a potential, refractory
// suppression, pixel-stream stalls and the refractory mode switch.

  localparam int AW   = $clog2(IMG);
  localparam int H_AW = (NU_L2 > 1) ? $clog2(NU_L2) : 1;
  localparam int O_AW = (NU_L3 > 1) ? $clog2(NU_L3) : 1;
  localparam int CW   = $clog2(T_STEPS + 1);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wl_en = 1'b0, wl_layer = 1'b0, wl_bias = 1'b0;
  logic [H_AW-1:0] wl_row = '0;
  logic [AW-1:0]   wl_col = '0;
  logic signed [15:0] wl_data = '0;
  lif_cfg_t cfg_hid, cfg_out;
  logic start = 1'b0, pix_valid = 1'b0, pix_ready, busy, done;
  logic [7:0] pix_data = '0;
  logic [O_AW-1:0] class_out;
  logic [CW-1:0] class_count;
  logic [NU_L3-1:0] out_step_spikes;
  logic [NU_L3-1:0][CW-1:0] spike_counts;
  logic [$clog2(T_STEPS + 1)-1:0] step;
  ctrl_state_e state;
  logic hid_valid, hid_spike, hid_sat, hid_blocked;
  logic out_valid, out_spike, out_sat, out_blocked;
  logic [H_AW-1:0] hid_idx;
  logic [O_AW-1:0] out_idx;
  logic signed [15:0] hid_u, out_u;

  always #5 clk = ~clk;

  `SNN_TOP_INST

  // Cycle budget of one inference, first LOAD cycle through the DONE cycle:
  // T_STEPS * (IMG + NU_L2 + 1 + NU_L3 + 1) + stalls + NU_L3 (phase 3) + 1 (done).

  // ---------------- reference model state ----------------
  int w1 [NU_L2][IMG];
  int b1 [NU_L2];
  int w2 [NU_L3][NU_L2];
  int b2 [NU_L3];
  logic [7:0] pix [IMG];
  // expected per step and neuron: potential after update and spike flags
  int   e_hu [T_STEPS][NU_L2];
  bit   e_hs [T_STEPS][NU_L2];
  int   e_ou [T_STEPS][NU_L3];
  bit   e_os [T_STEPS][NU_L3];
  int   e_cnt [NU_L3];
  int   e_class;
  int   n_hid_spike = 0, n_out_spike = 0, n_sat = 0, n_blocked = 0, n_stall = 0;
  int   n_refrac_on = 0, n_refrac_off = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  // one LIF update of the reference model
  function automatic bit lif_ref(inout int u, inout int r, input longint s, input int b,
                                 input lif_cfg_t c, output int u_after);
    longint v;
    int un;
    bit fire, sp;
    v = longint'(u >>> c.beta_shift) + s + b - int'(c.u_rest);
    un = (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
    fire = un >= int'(c.threshold);
    sp = fire && !(c.refrac_en && r != 0);
    u_after = un;
    u = sp ? 0 : un;
    if (!c.refrac_en) r = 0;
    else if (sp) r = REFRAC;
    else if (r != 0) r--;
    return sp;
  endfunction

  // whole inference of the reference model
  task automatic run_reference();
    logic [15:0] lfsr = 16'hACE1;
    int hu [NU_L2], hr [NU_L2], ou [NU_L3], orr [NU_L3];
    bit frame [IMG];
    bit hs [NU_L2];
    foreach (hu[j]) begin hu[j] = 0; hr[j] = 0; end
    foreach (ou[k]) begin ou[k] = 0; orr[k] = 0; e_cnt[k] = 0; end
    for (int t = 0; t < T_STEPS; t++) begin
      for (int i = 0; i < IMG; i++) begin
        frame[i] = (pix[i] == 8'hFF) || (int'(lfsr[7:0]) < int'(pix[i]));
        lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      end
      for (int j = 0; j < NU_L2; j++) begin
        longint s = 0;
        for (int i = 0; i < IMG; i++) if (frame[i]) s += w1[j][i];
        hs[j] = lif_ref(hu[j], hr[j], s, b1[j], cfg_hid, e_hu[t][j]);
        e_hs[t][j] = hs[j];
      end
      for (int k = 0; k < NU_L3; k++) begin
        longint s = 0;
        for (int j = 0; j < NU_L2; j++) if (hs[j]) s += w2[k][j];
        e_os[t][k] = lif_ref(ou[k], orr[k], s, b2[k], cfg_out, e_ou[t][k]);
        if (e_os[t][k]) e_cnt[k]++;
      end
    end
    e_class = 0;
    for (int k = 1; k < NU_L3; k++) if (e_cnt[k] > e_cnt[e_class]) e_class = k;
  endtask

  // ---------------- monitor of neuron updates ----------------
  always @(posedge clk) begin
    if (rst_n && busy) begin
      if (hid_valid) begin
        check(int'(hid_u) == e_hu[step][hid_idx] && hid_spike == e_hs[step][hid_idx],
              $sformatf("step %0d hidden %0d: u %0d/%0d spike %0b/%0b", step, hid_idx,
                        hid_u, e_hu[step][hid_idx], hid_spike, e_hs[step][hid_idx]));
        n_hid_spike += int'(hid_spike);
        n_sat       += int'(hid_sat);
        n_blocked   += int'(hid_blocked);
      end
      if (out_valid) begin
        check(int'(out_u) == e_ou[step][out_idx] && out_spike == e_os[step][out_idx],
              $sformatf("step %0d output %0d: u %0d/%0d spike %0b/%0b", step, out_idx,
                        out_u, e_ou[step][out_idx], out_spike, e_os[step][out_idx]));
        n_out_spike += int'(out_spike);
        n_sat       += int'(out_sat);
        n_blocked   += int'(out_blocked);
      end
    end
  end


  task automatic load(input bit layer, input bit bias, input int row, input int col, input int val);
    wl_en = 1'b1; wl_layer = layer; wl_bias = bias;
    wl_row = H_AW'(row); wl_col = AW'(col); wl_data = 16'(val);
    @(negedge clk);
  endtask

  initial begin
    int amp1, amp2;
    // weight spread chosen so that a typical weighted sum is about 0.5
    amp1 = int'(16384.0 * 1.73 / $sqrt(real'(USED_PIX) / 2.0));
    amp2 = int'(16384.0 * 1.73 / $sqrt(real'(NU_L2) / 6.0));
    for (int j = 0; j < NU_L2; j++) begin
      b1[j] = $signed($urandom_range(4000)) - 2000;
      for (int i = 0; i < IMG; i++)
        w1[j][i] = (i < USED_PIX) ? $signed($urandom_range(2 * amp1)) - amp1 : 0;
    end
    for (int k = 0; k < NU_L3; k++) begin
      b2[k] = $signed($urandom_range(4000)) - 1000;
      for (int j = 0; j < NU_L2; j++) w2[k][j] = $signed($urandom_range(2 * amp2)) - amp2 + 200 * k;
    end
    for (int i = 0; i < IMG; i++) begin
      if (i >= USED_PIX) pix[i] = 8'h00;
      else case (i % 4)
        0: pix[i] = 8'h00;
        1: pix[i] = 8'hFF;
        default: pix[i] = 8'($urandom);
      endcase
    end
    cfg_hid = '{threshold: 16'sd8192, u_rest: 16'(U_REST), beta_shift: 4'(HID_BETA), refrac_en: 1'b1};
    cfg_out = '{threshold: 16'sd4096, u_rest: 16'sd0, beta_shift: 4'(OUT_BETA), refrac_en: 1'b1};

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int j = 0; j < NU_L2; j++) begin
      for (int i = 0; i < IMG; i++) load(1'b0, 1'b0, j, i, w1[j][i]);
      load(1'b0, 1'b1, j, 0, b1[j]);
    end
    for (int k = 0; k < NU_L3; k++) begin
      for (int j = 0; j < NU_L2; j++) load(1'b1, 1'b0, k, j, w2[k][j]);
      load(1'b1, 1'b1, k, 0, b2[k]);
    end
    wl_en = 1'b0;

    for (int run = 0; run < 2; run++) begin
      int busy_cycles, stall_cycles, p;
      cfg_hid.refrac_en = (run == 0);
      cfg_out.refrac_en = (run == 0);
      if (run == 0) n_refrac_on++; else n_refrac_off++;
      run_reference();
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      busy_cycles = 1; stall_cycles = 0; p = 0;
      while (!done && busy_cycles < WATCHDOG) begin
        if (state == ST_LOAD) begin
          pix_valid = ($urandom_range(9) != 0);
          pix_data  = pix[p];
          if (!pix_valid) stall_cycles++;
        end else begin
          pix_valid = 1'b0;
        end
        @(posedge clk);
        if (pix_valid && pix_ready) p = (p == IMG - 1) ? 0 : p + 1;
        @(negedge clk);
        if (!done) busy_cycles++;
      end
      pix_valid = 1'b0;
      n_stall += stall_cycles;
      check(done, "inference did not finish");
      check(busy_cycles == T_STEPS * (IMG + NU_L2 + NU_L3 + 2) + stall_cycles + NU_L3 + 1,
            $sformatf("cycle count %0d, expected %0d", busy_cycles,
                      T_STEPS * (IMG + NU_L2 + NU_L3 + 2) + stall_cycles + NU_L3 + 1));
      for (int k = 0; k < NU_L3; k++)
        check(int'(spike_counts[k]) == e_cnt[k],
              $sformatf("spike count %0d: %0d expected %0d", k, spike_counts[k], e_cnt[k]));
      check(int'(class_out) == e_class, $sformatf("class %0d expected %0d", class_out, e_class));
      check(int'(class_count) == e_cnt[e_class], "winning count");
      $display("run %0d: counts %0d/%0d class %0d (%s), %0d cycles", run,
               spike_counts[0], spike_counts[NU_L3 - 1], class_out,
               class_out == 0 ? "collision" : "no collision", busy_cycles);
      @(negedge clk);
    end
    $display("mechanisms: hidden spikes %0d, output spikes %0d, saturations %0d, refractory blocks %0d, stalls %0d, refractory on/off runs %0d/%0d",
             n_hid_spike, n_out_spike, n_sat, n_blocked, n_stall, n_refrac_on, n_refrac_off);
    check(n_hid_spike > 0, "no hidden spike");
    check(n_out_spike > 0, "no output spike");
    check(n_sat > 0, "no saturation");
    check(n_blocked > 0, "no refractory suppression");
    check(n_stall > 0, "no pixel stall");
    check(n_refrac_on > 0 && n_refrac_off > 0, "refractory mode switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
