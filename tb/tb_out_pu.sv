// tb_out_pu: random self-check of the 8-bit-weight output PU against an integer model.
module tb_out_pu;
  logic clk = 0, en = 0, rstnet = 0;
  logic [7:0] din = 0;
  logic signed [7:0] w = 0;
  logic signed [15:0] bias = 0;
  logic signed [25:0] dout;
  int checks = 0, failures = 0;
  longint model;

  out_pu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 20; trial++) begin
      @(negedge clk);
      bias = 16'($urandom); rstnet = 1; en = 0;
      model = longint'(bias);
      @(negedge clk); rstnet = 0;
      checks++;
      if (longint'(dout) != model) failures++;
      for (int k = 0; k < 1022; k++) begin
        en = ($urandom_range(0, 7) != 0);
        din = 8'($urandom); w = 8'($urandom);
        if (trial == 0) begin din = 8'd255; w = -8'sd128; en = 1; end
        @(negedge clk);
        if (en) model += longint'(w) * longint'(din);
        checks++;
        if (longint'(dout) != model) begin
          failures++;
          if (failures < 10) $display("trial %0d k %0d dout %0d model %0d", trial, k, dout, model);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
