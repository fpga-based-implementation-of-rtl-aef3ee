// wmem: on-chip weight memory of one tile (block RAM).
//
// Row k holds the weights that input k of the layer meets at every node of the layer, node j
// in bits [WQ*j +: WQ]; for a hidden tile of 1022 nodes and 3-bit weights a row is 3066 bits,
// as in the tile figure of the paper (3 x 1022 x M bits for M inputs). The read port is
// synchronous: the row addressed while rd_en is high appears on rd_data one clock later.
// The load port writes one LD_W-bit slice (ld_word) of a row per clock; rows are padded to a
// multiple of LD_W internally. The load port is this design's own choice: the paper only says
// the weights are trained off line and downloaded.
module wmem
  import dnn_pkg::*;
#(
  parameter int unsigned DEPTH = 1022,
  parameter int unsigned WIDTH = 3066,
  parameter int unsigned AW    = 10,
  parameter int unsigned CW    = 7
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data,
  input  logic             ld_we,
  input  logic [AW-1:0]    ld_row,
  input  logic [CW-1:0]    ld_word,
  input  logic [LD_W-1:0]  ld_data
);

  localparam int unsigned NWORDS = (WIDTH + LD_W - 1) / LD_W;
  localparam int unsigned PW     = NWORDS * LD_W;

  logic [PW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_we && 32'(ld_row) < DEPTH && 32'(ld_word) < NWORDS)
      mem[ld_row][ld_word*LD_W +: LD_W] <= ld_data;
    if (rd_en)
      rd_data <= mem[rd_addr][WIDTH-1:0];
  end

endmodule
