// tb_control_unit: self-checking test of the inference sequencer at a small
// size (8 pixels, 4 hidden and 2 output neurons, 3 time steps).
//
// The host side sends pixels with random gaps (pix_valid low stalls the
// load); a stand-in comparator answers cls_start with cls_done after N_L3
// cycles. Every cycle the test checks the control outputs against the
// expected schedule: addresses 0..7 in order during LOAD, layer-1 rows
// 0..3 on consecutive cycles and a phase of NU_L2+1 cycles, layer-2 rows
// 0..1 and NU_L3+1 cycles, one cls_start after the last step, one clear and
// seed_load at start, one done at the end.
module tb_control_unit;
  import snn_pkg::*;
  localparam int IMG = 8, NU_L2 = 4, NU_L3 = 2, T_STEPS = 3;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, pix_valid = 1'b0, cls_done = 1'b0;
  logic pix_ready, clear, seed_load, in_wr_en, l1_rd_en, l2_rd_en, cls_start, busy, done;
  logic [2:0] in_wr_addr;
  logic [1:0] l1_rd_row;
  logic       l2_rd_row;
  logic [1:0] step;
  ctrl_state_e state;

  always #5 clk = ~clk;

  control_unit #(.IMG_SIZE(IMG), .NU_L2(NU_L2), .NU_L3(NU_L3), .T_STEPS(T_STEPS)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in comparator
  initial begin
    forever begin
      @(posedge clk);
      if (cls_start) begin
        repeat (NU_L3 - 1) @(posedge clk);
        #1 cls_done = 1'b1;
        @(posedge clk);
        #1 cls_done = 1'b0;
      end
    end
  end

  initial begin
    int n_stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      int cyc;
      @(negedge clk);
      check(state == ST_IDLE && !busy, "idle");
      start = 1'b1;
      #1 check(clear && seed_load, "clear/seed_load with start");
      @(negedge clk) start = 1'b0;
      check(!clear, "clear is a pulse");
      for (int t = 0; t < T_STEPS; t++) begin
        check(int'(step) == t, $sformatf("step %0d", t));
        // LOAD with random gaps
        for (int p = 0; p < IMG; p++) begin
          while ($urandom_range(2) == 0) begin
            pix_valid = 1'b0; #1;
            check(pix_ready && !in_wr_en && state == ST_LOAD, "stall");
            n_stall++;
            @(negedge clk);
          end
          pix_valid = 1'b1; #1;
          check(in_wr_en && int'(in_wr_addr) == p, $sformatf("pixel address %0d", p));
          @(negedge clk);
        end
        pix_valid = 1'b0;
        // PHASE1
        for (int r = 0; r <= NU_L2; r++) begin
          check(state == ST_PHASE1, "phase 1 length");
          if (r < NU_L2) check(l1_rd_en && int'(l1_rd_row) == r, $sformatf("l1 row %0d", r));
          else           check(!l1_rd_en, "l1 read stops");
          check(!pix_ready && !l2_rd_en, "no overlap in phase 1");
          @(negedge clk);
        end
        // PHASE2
        for (int r = 0; r <= NU_L3; r++) begin
          check(state == ST_PHASE2, "phase 2 length");
          if (r < NU_L3) check(l2_rd_en && int'(l2_rd_row) == r, $sformatf("l2 row %0d", r));
          else           check(!l2_rd_en && cls_start == (t == T_STEPS - 1), "cls_start after last step only");
          @(negedge clk);
        end
      end
      // PHASE3
      cyc = 0;
      while (state == ST_PHASE3 && cyc < 50) begin @(negedge clk); cyc++; end
      check(cyc == NU_L3, $sformatf("phase 3 took %0d cycles", cyc));
      check(state == ST_DONE && done, "done");
      @(negedge clk);
      check(state == ST_IDLE && !done, "back to idle");
    end
    check(n_stall > 0, "no stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
