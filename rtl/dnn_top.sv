// dnn_top: programmable-logic part of the DNN recogniser, weights held entirely on chip.
//
// The processing system writes a batch of N_IMG images (N_IN bytes each, image n at byte
// n*N_IN) into BRAM0 or BRAM1 through port A, sets gpio0 = {bank, start} and waits for
// gpio1[0] (done). The DNN reads the image bytes through port B and the input multiplexer,
// passes them through N_LAYERS hidden tiles (N_HID nodes each, 3-bit weights) and the output
// tile (N_OUT nodes, 8-bit weights), and writes the recognised class of image n as one byte at
// byte address N_IMG*N_IN + n of the same BRAM. The PS can fill the other BRAM meanwhile.
// The tiles run as a pipeline, one image slot of 2*(max(N_IN,N_HID)+2)+3 clocks per image,
// so a batch takes (N_IMG + N_LAYERS + 1) slots.
//
// The weights, biases and Delta coefficients are written before a batch through the load
// port: ld_layer 0..N_LAYERS-1 selects a hidden tile, N_LAYERS the output tile; ld_kind
// 0 = weight slice ld_word of row ld_row, 1 = bias of node ld_row, 2 = Delta.
// From the paper: the block structure (two BRAMs, 32-bit input muxes, tile chain, controller
// on GPIO0/GPIO1), the 784-1022-1022-1022-10 network and the batch of 100 images. Own
// choices: the load port, the GPIO bit assignment, the result address map, and a register
// between consecutive tiles.
module dnn_top
  import dnn_pkg::*;
#(
  parameter int unsigned N_IMG    = 100,
  parameter int unsigned N_IN     = 784,
  parameter int unsigned N_HID    = 1022,
  parameter int unsigned N_LAYERS = 3,
  parameter int unsigned N_OUT    = 10,
  parameter int unsigned IDX_W    = 10,
  parameter int unsigned AW       = 15
) (
  input  logic            clk,
  input  logic            rst_n,
  // BRAM0 / BRAM1, processing-system side
  input  logic            ps0_en,
  input  logic [3:0]      ps0_we,
  input  logic [AW-1:0]   ps0_addr,
  input  logic [31:0]     ps0_wdata,
  output logic [31:0]     ps0_rdata,
  input  logic            ps1_en,
  input  logic [3:0]      ps1_we,
  input  logic [AW-1:0]   ps1_addr,
  input  logic [31:0]     ps1_wdata,
  output logic [31:0]     ps1_rdata,
  // GPIO0: bit 0 start, bit 1 bank; GPIO1: bit 0 done
  input  logic [1:0]      gpio0,
  output logic [0:0]      gpio1,
  // parameter load
  input  logic            ld_we,
  input  logic [2:0]      ld_layer,
  input  logic [1:0]      ld_kind,
  input  logic [IDX_W-1:0] ld_row,
  input  logic [6:0]      ld_word,
  input  logic [LD_W-1:0] ld_data
);

  localparam int unsigned BA_W = AW + 2;

  initial assert (N_IMG * N_IN + N_IMG <= (4 << AW)) else $error("dnn_top: BRAM too small");

  // controller
  ctrl_state_e         state;
  logic                idle, rstnet, selnet, cap0, cap1, cmp_en, en_out;
  logic                rd_en, we_res, bank_q, fin;
  logic [IDX_W-1:0]    cnt;
  logic [N_LAYERS-1:0] en_tile;
  logic [BA_W-1:0]     rd_baddr, wr_baddr;
  logic [7:0]          cnt_digit;

  controller #(
    .N_IMG(N_IMG), .N_IN(N_IN), .N_HID(N_HID), .N_LAYERS(N_LAYERS),
    .N_OUT(N_OUT), .IDX_W(IDX_W), .BA_W(BA_W)
  ) u_ctrl (
    .clk, .rst_n,
    .start (gpio0[0]),
    .bank  (gpio0[1]),
    .state, .idle, .rstnet, .selnet, .cnt, .en_tile, .en_out, .cap0, .cap1, .cmp_en,
    .rd_en, .rd_baddr, .we_res, .wr_baddr, .bank_q, .cnt_digit, .fin
  );

  assign gpio1[0] = fin;

  // BRAM0 / BRAM1, DNN side
  logic [7:0]    cls;
  logic          cls_valid;
  logic          b_en;
  logic [3:0]    b_we;
  logic [AW-1:0] b_addr;
  logic [31:0]   b_rdata0, b_rdata1;

  always_comb begin
    b_en   = rd_en || we_res;
    b_we   = we_res ? (4'b0001 << wr_baddr[1:0]) : 4'b0000;
    b_addr = we_res ? wr_baddr[BA_W-1:2] : rd_baddr[BA_W-1:2];
  end

  dp_bram #(.AW(AW)) u_bram0 (
    .clk,
    .a_en(ps0_en), .a_we(ps0_we), .a_addr(ps0_addr), .a_wdata(ps0_wdata), .a_rdata(ps0_rdata),
    .b_en(b_en && !bank_q), .b_we(b_we), .b_addr(b_addr), .b_wdata({4{cls}}), .b_rdata(b_rdata0)
  );

  dp_bram #(.AW(AW)) u_bram1 (
    .clk,
    .a_en(ps1_en), .a_we(ps1_we), .a_addr(ps1_addr), .a_wdata(ps1_wdata), .a_rdata(ps1_rdata),
    .b_en(b_en && bank_q), .b_we(b_we), .b_addr(b_addr), .b_wdata({4{cls}}), .b_rdata(b_rdata1)
  );

  // tile chain
  logic [SIG_W-1:0] tile_din  [N_LAYERS+1];
  logic [SIG_W-1:0] tile_dout [N_LAYERS];

  in_mux u_in_mux (
    .clk, .bank(bank_q), .byte_sel(rd_baddr[1:0]),
    .rdata0(b_rdata0), .rdata1(b_rdata1), .dout(tile_din[0])
  );

  for (genvar t = 0; t < N_LAYERS; t++) begin : g_tile
    hidden_tile #(
      .N_IN((t == 0) ? N_IN : N_HID), .N_NODE(N_HID), .IDX_W(IDX_W)
    ) u_tile (
      .clk, .rst_n,
      .en      (en_tile[t]),
      .in_idx  (cnt),
      .din     (tile_din[t]),
      .rstnet, .sel(selnet), .cap0, .cap1,
      .out_idx (cnt),
      .dout    (tile_dout[t]),
      .ld_we   (ld_we && 32'(ld_layer) == t),
      .ld_kind (ld_kind_e'(ld_kind)),
      .ld_row, .ld_word, .ld_data
    );

    // register between tile t and tile t+1 (or the output tile)
    always_ff @(posedge clk) tile_din[t+1] <= tile_dout[t];
  end

  out_tile #(.N_IN(N_HID), .N_OUT(N_OUT), .IDX_W(IDX_W)) u_out (
    .clk, .rst_n,
    .en      (en_out),
    .in_idx  (cnt),
    .din     (tile_din[N_LAYERS]),
    .rstnet,
    .cap     (cap1),
    .cmp_en,
    .cls, .cls_valid,
    .ld_we   (ld_we && 32'(ld_layer) == N_LAYERS),
    .ld_kind (ld_kind_e'(ld_kind)),
    .ld_row, .ld_word, .ld_data
  );

endmodule
