// tb_wmem: loads random rows slice by slice, reads them back and checks the one-clock read
// latency and that a read without rd_en holds the previous data.
module tb_wmem;
  localparam int DEPTH = 12, WIDTH = 70, NW = 3;
  logic clk = 0, rd_en = 0, ld_we = 0;
  logic [3:0] rd_addr = 0, ld_row = 0;
  logic [1:0] ld_word = 0;
  logic [31:0] ld_data = 0;
  logic [WIDTH-1:0] rd_data;
  logic [NW*32-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  wmem #(.DEPTH(DEPTH), .WIDTH(WIDTH), .AW(4), .CW(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < DEPTH; r++)
      for (int c = 0; c < NW; c++) begin
        @(negedge clk);
        ld_we = 1; ld_row = 4'(r); ld_word = 2'(c); ld_data = $urandom;
        ref_mem[r][32*c +: 32] = ld_data;
      end
    @(negedge clk); ld_we = 0;
    for (int n = 0; n < 60; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = 4'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = 4'($urandom_range(0, DEPTH - 1));
      checks++;
      if (rd_data !== ref_mem[a][WIDTH-1:0]) begin failures++; $display("row %0d mismatch", a); end
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[a][WIDTH-1:0]) begin failures++; $display("row %0d not held", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
