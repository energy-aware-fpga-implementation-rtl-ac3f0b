// tb_snn_top: end-to-end test of the SNN accelerator at reduced size
// (64 pixels, 16 hidden neurons, 2 outputs, 25 time steps, refractory 5).
// See snn_top_tb_body.svh for what is driven and checked.
module tb_snn_top;
  import snn_pkg::*;
  localparam int IMG = 64, NU_L2 = 16, NU_L3 = 2, T_STEPS = 25, REFRAC = 5;
  localparam int WATCHDOG = 400000;
  localparam int USED_PIX = IMG, HID_BETA = 1, OUT_BETA = 2, U_REST = 100;
`define SNN_TOP_INST snn_top #(.IMG_SIZE(IMG), .NU_L2(NU_L2), .NU_L3(NU_L3), .T_STEPS(T_STEPS), .REFRAC(REFRAC)) dut (.*);
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
