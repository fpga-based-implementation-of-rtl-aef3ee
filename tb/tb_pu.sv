// tb_pu: random self-check of the hidden-layer PU against an integer model: bias load with
// either select, weights -3..+3 (both sign codes of zero), en hold, 16-bit output saturation.
module tb_pu;
  import dnn_ref_pkg::*;
  logic clk = 0, en = 0, rstnet = 0, sel = 0;
  logic [7:0] din = 0;
  logic [2:0] w = 0;
  logic signed [15:0] bias0 = 0, bias1 = 0, dout;
  int checks = 0, failures = 0, n_sat = 0;
  longint model;

  pu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 60; trial++) begin
      @(negedge clk);
      sel = trial[0];
      bias0 = 16'($urandom); bias1 = 16'($urandom);
      if (trial % 5 == 4) begin bias0 = 16'sd32000; bias1 = -16'sd32000; end
      rstnet = 1; en = 0;
      model = sel ? longint'(bias1) : longint'(bias0);
      @(negedge clk);
      rstnet = 0;
      if (dout !== 16'(sat(model, 16))) begin failures++; $display("bias load mismatch %0d %0d", dout, model); end
      checks++;
      for (int k = 0; k < 300; k++) begin
        en  = ($urandom_range(0, 9) != 0);
        din = 8'($urandom);
        w   = 3'($urandom);
        if (trial % 5 == 4) w = sel ? 3'b111 : 3'b011;
        @(negedge clk);
        if (en) model += wq_val(int'(w)) * int'(din);
        if (dout !== 16'(sat(model, 16))) begin
          failures++;
          if (failures < 10) $display("mismatch trial %0d k %0d dout %0d model %0d", trial, k, dout, model);
        end
        if (model > 32767 || model < -32768) n_sat++;
        checks++;
      end
    end
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
