// tb_in_mux: checks bank selection and that the byte offset given with the address is
// applied to the data one clock later.
module tb_in_mux;
  logic clk = 0, bank = 0;
  logic [1:0] byte_sel = 0;
  logic [31:0] rdata0 = 0, rdata1 = 0;
  logic [7:0] dout;
  int checks = 0, failures = 0;

  in_mux dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] prev;
    @(negedge clk);
    prev = byte_sel;
    for (int n = 0; n < 500; n++) begin
      logic [31:0] w;
      byte_sel = 2'($urandom);
      prev = byte_sel;
      @(negedge clk);
      byte_sel = 2'($urandom);
      bank = $urandom_range(0, 1);
      rdata0 = $urandom; rdata1 = $urandom;
      #1;
      w = bank ? rdata1 : rdata0;
      checks++;
      if (dout !== w[8*prev +: 8]) begin failures++; $display("mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
