// tb_dnn_top: end-to-end test of dnn_top at reduced size (12 inputs, three hidden layers of
// 8 nodes, 3 outputs, 5 images per batch, 3 batches alternating BRAM0/BRAM1). See
// tb_dnn_body.svh for what is driven and checked.
module tb_dnn_top;
  localparam int N_IMG = 5, N_IN = 12, N_HID = 8, N_LAYERS = 3, N_OUT = 3;
  localparam int IDX_W = 5, AW = 6, N_BATCH = 3, WATCHDOG = 200000;

  `include "tb_dnn_body.svh"

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  dnn_top #(.N_IMG(N_IMG), .N_IN(N_IN), .N_HID(N_HID), .N_LAYERS(N_LAYERS), .N_OUT(N_OUT),
            .IDX_W(IDX_W), .AW(AW)) dut (.*);
endmodule
