// tb_dnn_phoneme: end-to-end test of dnn_top configured for the phoneme-recognition network:
// 429 inputs (11 frames of MFCC features), four hidden layers of 1022 nodes, 61 outputs.
// Batches of 10 frames, two batches alternating BRAM0 and BRAM1; 429-byte frames also test
// images that do not start on a word boundary. See tb_dnn_body.svh for what is checked.
module tb_dnn_phoneme;
  localparam int N_IMG = 10, N_IN = 429, N_HID = 1022, N_LAYERS = 4, N_OUT = 61;
  localparam int IDX_W = 10, AW = 15, N_BATCH = 2, WATCHDOG = 2000000;

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
