// tb_snn_lapicque_32x32: workload test at the full default size of snn_top.
// It runs two network variants that were evaluated alongside the main
// 64x64 LIF network:
//  * a 32x32 image (1024 pixels) in the 4096-pixel frame, with the other
//    3072 pixels black and their weights zero;
//  * Lapicque integrate-and-fire neurons (no leak: beta = 1, beta_shift = 0,
//    resting potential 0) in both layers.
// Everything else (checks, reference model, two inferences with the
// refractory period on and off) is as in snn_top_tb_body.svh.
module tb_snn_lapicque_32x32;
  import snn_pkg::*;
  localparam int IMG = IMG_SIZE_D, NU_L2 = NU_L2_D, NU_L3 = NU_L3_D;
  localparam int T_STEPS = T_STEPS_D, REFRAC = REFRAC_D;
  localparam int WATCHDOG = 3000000;
  localparam int USED_PIX = 1024, HID_BETA = 0, OUT_BETA = 0, U_REST = 0;
`define SNN_TOP_INST snn_top dut (.*);
`include "snn_top_tb_body.svh"

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
