// in_mux: input selection in front of the first tile.
//
// A 32-bit word is read from BRAM0 or BRAM1 (bank) and the byte at offset byte_sel is passed
// on as the 8-bit input of tile 1. The BRAM read data arrive one clock after the address, so
// byte_sel is registered here and applied to that data; bank is stable for a whole batch.
// Byte 0 is bits [7:0] (little-endian, as the processing system writes it).
// From the paper: the 2:1 32-bit multiplexer and the 32-to-8 multiplexer in front of tile 1.
// Own choices: the byte order and the registered byte offset.
module in_mux
  import dnn_pkg::*;
(
  input  logic             clk,
  input  logic             bank,
  input  logic [1:0]       byte_sel,
  input  logic [31:0]      rdata0,
  input  logic [31:0]      rdata1,
  output logic [SIG_W-1:0] dout
);

  logic [1:0]  byte_q;
  logic [31:0] word;

  always_ff @(posedge clk) byte_q <= byte_sel;

  assign word = bank ? rdata1 : rdata0;
  assign dout = word[8*byte_q +: 8];

endmodule
