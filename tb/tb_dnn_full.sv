// tb_dnn_full: end-to-end test of dnn_top with all parameters at their defaults: the
// 784-1022-1022-1022-10 digit-recognition network and batches of 100 images, two batches
// alternating BRAM0 and BRAM1. See tb_dnn_body.svh for what is driven and checked.
module tb_dnn_full;
  localparam int N_IMG = 100, N_IN = 784, N_HID = 1022, N_LAYERS = 3, N_OUT = 10;
  localparam int IDX_W = 10, AW = 15, N_BATCH = 2, WATCHDOG = 3000000;

  `include "tb_dnn_body.svh"

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dnn_top dut (.*);
endmodule
