// hidden_tile: one hidden layer of the network (N_NODE nodes, N_IN inputs).
//
// N_NODE/2 PUs share the tile's input: each PU computes node i in the first pass (sel = 0,
// Bias0) and node i + N_NODE/2 in the second pass (sel = 1, Bias1); in each pass the inputs
// 0..N_IN-1 arrive one per clock. The weight memory row for input k carries the weights of all
// nodes; sel picks the half that feeds the PUs. Every PU has two output registers: cap0 (end of
// pass 0) moves its result into the first register of node i's chain; cap1 (end of pass 1)
// moves that value on to net[i] and puts the pass-1 result into net[i + N_NODE/2]. The net
// registers therefore hold a whole layer output steady for the next image slot, while the PUs
// already work on the next image. The next tile reads net[out_idx] through a multiplexer, a
// multiplication by the layer coefficient Delta and the sigmoid unit: dout is combinational.
//
// Timing: en/in_idx at clock t read weight row in_idx; din for that index must be present at
// t+1, when the PUs accumulate it. rstnet loads the biases (selected by sel) into the PUs.
// Load port: ld_kind LD_WEIGHT writes slice ld_word of weight row ld_row; LD_BIAS writes the
// bias of node ld_row from ld_data[15:0]; LD_DELTA writes Delta from ld_data[7:0].
// From the paper: the PU pairing, the 3066-bit row and 1533-bit half select, the two output
// registers per PU, the output multiplexer, x Delta and one activation unit per tile.
// Own choices: Delta as an 8-bit fraction with the product shifted right by 12 and saturated
// to a Q4.4 sigmoid input, the load port, and bias/Delta kept in registers.
module hidden_tile
  import dnn_pkg::*;
#(
  parameter int unsigned N_IN   = 1022,
  parameter int unsigned N_NODE = 1022,
  parameter int unsigned IDX_W  = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  // pass control
  input  logic             en,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [SIG_W-1:0] din,
  input  logic             rstnet,
  input  logic             sel,
  input  logic             cap0,
  input  logic             cap1,
  // layer output to the next tile
  input  logic [IDX_W-1:0] out_idx,
  output logic [SIG_W-1:0] dout,
  // parameter load
  input  logic             ld_we,
  input  ld_kind_e         ld_kind,
  input  logic [IDX_W-1:0] ld_row,
  input  logic [6:0]       ld_word,
  input  logic [LD_W-1:0]  ld_data
);

  localparam int unsigned N_PU  = N_NODE / 2;
  localparam int unsigned ROW_W = WQ_W * N_NODE;
  localparam int unsigned HALF  = WQ_W * N_PU;

  initial assert (N_NODE % 2 == 0) else $error("hidden_tile: N_NODE must be even");

  logic [ROW_W-1:0]  wrow;
  logic [HALF-1:0]   whalf;
  logic              en_d;

  logic signed [BIAS_W-1:0]   bias  [N_NODE];
  logic        [DELTA_W-1:0]  delta;
  logic signed [PU_OUT_W-1:0] pu_out [N_PU];
  logic signed [PU_OUT_W-1:0] stage  [N_PU];
  logic signed [PU_OUT_W-1:0] net    [N_NODE];

  wmem #(.DEPTH(N_IN), .WIDTH(ROW_W), .AW(IDX_W), .CW(7)) u_wmem (
    .clk     (clk),
    .rd_en   (en),
    .rd_addr (in_idx),
    .rd_data (wrow),
    .ld_we   (ld_we && ld_kind == LD_WEIGHT),
    .ld_row  (ld_row),
    .ld_word (ld_word),
    .ld_data (ld_data)
  );

  assign whalf = sel ? wrow[ROW_W-1:HALF] : wrow[HALF-1:0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) en_d <= 1'b0;
    else        en_d <= en;

  always_ff @(posedge clk) begin
    if (ld_we && ld_kind == LD_BIAS && 32'(ld_row) < N_NODE)
      bias[ld_row] <= ld_data[BIAS_W-1:0];
    if (ld_we && ld_kind == LD_DELTA)
      delta <= ld_data[DELTA_W-1:0];
  end

  for (genvar i = 0; i < N_PU; i++) begin : g_pu
    pu u_pu (
      .clk    (clk),
      .en     (en_d),
      .rstnet (rstnet),
      .sel    (sel),
      .din    (din),
      .w      (whalf[WQ_W*i +: WQ_W]),
      .bias0  (bias[i]),
      .bias1  (bias[i+N_PU]),
      .dout   (pu_out[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        stage[i]      <= '0;
        net[i]        <= '0;
        net[i+N_PU]   <= '0;
      end else begin
        if (cap0) stage[i] <= pu_out[i];
        if (cap1) begin
          net[i]      <= stage[i];
          net[i+N_PU] <= pu_out[i];
        end
      end
    end
  end

  // output multiplexer, x Delta, activation
  logic signed [PU_OUT_W-1:0]         net_sel;
  logic signed [PU_OUT_W+DELTA_W:0]   scaled;
  logic signed [SIG_W-1:0]            act_in;

  always_comb begin
    net_sel = (32'(out_idx) < N_NODE) ? net[out_idx] : '0;
    scaled  = net_sel * $signed({1'b0, delta});
    act_in  = SIG_W'(sat_s(48'(scaled >>> DELTA_SH), SIG_W));
  end

  act_sigmoid u_act (.x(act_in), .y(dout));

endmodule
