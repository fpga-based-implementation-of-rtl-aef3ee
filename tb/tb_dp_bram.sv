// tb_dp_bram: random byte-masked writes and reads on both ports against a reference array,
// including reads on one port of data written through the other.
module tb_dp_bram;
  localparam int AW = 5;
  logic clk = 0, a_en = 0, b_en = 0;
  logic [3:0] a_we = 0, b_we = 0;
  logic [AW-1:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [31:0] ref_mem [1 << AW];
  int checks = 0, failures = 0;

  dp_bram #(.AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise through port A
    for (int i = 0; i < (1 << AW); i++) begin
      @(negedge clk); a_en = 1; a_we = 4'hf; a_addr = AW'(i); a_wdata = $urandom; ref_mem[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] ea, eb;
      logic ra, rb;
      a_en = $urandom_range(0, 1); b_en = $urandom_range(0, 1);
      a_addr = AW'($urandom); b_addr = AW'($urandom);
      if (b_addr == a_addr) b_addr = b_addr + 1'b1;
      a_we = $urandom_range(0, 2) == 0 ? 4'($urandom) : 4'h0;
      b_we = $urandom_range(0, 2) == 0 ? 4'($urandom) : 4'h0;
      a_wdata = $urandom; b_wdata = $urandom;
      ea = ref_mem[a_addr]; eb = ref_mem[b_addr]; ra = a_en; rb = b_en;
      if (a_en) for (int b = 0; b < 4; b++) if (a_we[b]) ref_mem[a_addr][8*b +: 8] = a_wdata[8*b +: 8];
      if (b_en) for (int b = 0; b < 4; b++) if (b_we[b]) ref_mem[b_addr][8*b +: 8] = b_wdata[8*b +: 8];
      @(negedge clk);
      if (ra) begin checks++; if (a_rdata !== ea) begin failures++; $display("A mismatch"); end end
      if (rb) begin checks++; if (b_rdata !== eb) begin failures++; $display("B mismatch"); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
