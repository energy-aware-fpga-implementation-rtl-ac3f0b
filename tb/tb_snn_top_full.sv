// tb_snn_top_full: end-to-end test of the SNN accelerator at its default,
// full size (64x64 = 4096 pixels, 512 hidden neurons, 2 outputs, 25 time
// steps). Loads all 2,098,176 weights and biases, then runs two inferences.
// See snn_top_tb_body.svh for what is driven and checked.
module tb_snn_top_full;
  import snn_pkg::*;
  localparam int IMG = IMG_SIZE_D, NU_L2 = NU_L2_D, NU_L3 = NU_L3_D;
  localparam int T_STEPS = T_STEPS_D, REFRAC = REFRAC_D;
  localparam int WATCHDOG = 3000000;
  localparam int USED_PIX = IMG, HID_BETA = 1, OUT_BETA = 2, U_REST = 100;
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
