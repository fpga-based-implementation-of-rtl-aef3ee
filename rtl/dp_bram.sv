// dp_bram: true dual-port block RAM with byte write enables (BRAM0 / BRAM1).
//
// Port A belongs to the processing system (through its AXI BRAM controller), port B to the
// DNN. Both ports are synchronous: address and enable at clock t, read data at t+1; a write
// takes the bytes whose we bit is set. Writes to the same word from both ports in one clock
// are not arbitrated (the sequencing of the system never does this).
// From the paper: two BRAMs shared by PS and PL, used alternately for a batch of images and
// its results. Own choices: 32-bit words (the paper's input multiplexer is 32 bits wide),
// byte enables, depth 2^AW words.
module dp_bram #(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [3:0]    a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [3:0]    b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [1 << AW];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int b = 0; b < 4; b++)
        if (a_we[b]) mem[a_addr][8*b +: 8] <= a_wdata[8*b +: 8];
      a_rdata <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      for (int b = 0; b < 4; b++)
        if (b_we[b]) mem[b_addr][8*b +: 8] <= b_wdata[8*b +: 8];
      b_rdata <= mem[b_addr];
    end
  end

endmodule
