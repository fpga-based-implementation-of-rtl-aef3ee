// out_tile: output layer and class decision.
//
// N_OUT out_pu units, one per output node, accumulate the N_IN outputs of the last hidden
// tile (one per clock, en/in_idx at t, din at t+1, as in hidden_tile) with 8-bit weights read
// from the tile's weight memory (row k = the N_OUT weights of input k, node j in bits
// [8j +: 8]). cap copies the node results into result registers, so the PUs can start the next
// image. While cmp_en is high the result registers are compared one per clock (node 0 first);
// after N_OUT such clocks cls holds the index of the largest output (the lowest index on a
// tie) and cls_valid pulses for one clock.
// Load port as in hidden_tile (LD_WEIGHT slices of a row, LD_BIAS per node).
// From the paper: 8-bit weights, one PU per output node, comparison of the outputs to find the
// recognised digit or phoneme. Own choices: the serial comparison, one node per clock (the
// timing diagram shows the output-tile enable high for 10 clocks in the first pass), and the
// tie rule.
module out_tile
  import dnn_pkg::*;
#(
  parameter int unsigned N_IN   = 1022,
  parameter int unsigned N_OUT  = 10,
  parameter int unsigned IDX_W  = 10,
  parameter int unsigned NET_BITS = 26
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [SIG_W-1:0] din,
  input  logic             rstnet,
  input  logic             cap,
  input  logic             cmp_en,
  output logic [7:0]       cls,
  output logic             cls_valid,
  input  logic             ld_we,
  input  ld_kind_e         ld_kind,
  input  logic [IDX_W-1:0] ld_row,
  input  logic [6:0]       ld_word,
  input  logic [LD_W-1:0]  ld_data
);

  localparam int unsigned ROW_W = OW_W * N_OUT;
  localparam int unsigned JW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  logic [ROW_W-1:0]             wrow;
  logic                         en_d;
  logic signed [BIAS_W-1:0]     bias [N_OUT];
  logic signed [NET_BITS-1:0]   acc  [N_OUT];
  logic signed [NET_BITS-1:0]   res  [N_OUT];

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

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) en_d <= 1'b0;
    else        en_d <= en;

  always_ff @(posedge clk)
    if (ld_we && ld_kind == LD_BIAS && 32'(ld_row) < N_OUT)
      bias[JW'(ld_row)] <= ld_data[BIAS_W-1:0];

  for (genvar j = 0; j < N_OUT; j++) begin : g_pu
    out_pu #(.NET_BITS(NET_BITS)) u_pu (
      .clk    (clk),
      .en     (en_d),
      .rstnet (rstnet),
      .din    (din),
      .w      (wrow[OW_W*j +: OW_W]),
      .bias   (bias[j]),
      .dout   (acc[j])
    );
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n)   res[j] <= '0;
      else if (cap) res[j] <= acc[j];
  end

  // serial comparator
  logic [7:0]                 cmp_idx;
  logic [7:0]                 best_idx;
  logic signed [NET_BITS-1:0] best_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_idx   <= '0;
      best_idx  <= '0;
      best_val  <= '0;
      cls       <= '0;
      cls_valid <= 1'b0;
    end else begin
      cls_valid <= 1'b0;
      if (!cmp_en) begin
        cmp_idx <= '0;
      end else if (32'(cmp_idx) < N_OUT) begin
        if (cmp_idx == 0 || res[JW'(cmp_idx)] > best_val) begin
          best_val <= res[JW'(cmp_idx)];
          best_idx <= cmp_idx;
        end
        cmp_idx <= cmp_idx + 8'd1;
        if (32'(cmp_idx) == N_OUT - 1) begin
          cls_valid <= 1'b1;
          cls <= (cmp_idx == 0 || res[JW'(cmp_idx)] > best_val) ? cmp_idx : best_idx;
        end
      end
    end
  end

endmodule
