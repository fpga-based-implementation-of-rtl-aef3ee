// tb_act_sigmoid: exhaustive check of the 256-entry sigmoid against exp().
module tb_act_sigmoid;
  import dnn_ref_pkg::*;
  logic signed [7:0] x;
  logic [7:0] y;
  int checks = 0, failures = 0;

  act_sigmoid dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -128; i < 128; i++) begin
      x = 8'(i);
      #1;
      checks++;
      if (int'(y) != sig_ref(i)) begin
        failures++;
        $display("x=%0d y=%0d expected %0d", i, y, sig_ref(i));
      end
    end
    // monotonic
    for (int i = -128; i < 127; i++) begin
      int a;
      x = 8'(i); #1; a = int'(y);
      x = 8'(i + 1); #1;
      checks++;
      if (int'(y) < a) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
