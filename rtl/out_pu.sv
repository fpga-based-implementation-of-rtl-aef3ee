// out_pu: processing unit of the output tile.
//
// The output layer keeps 8-bit weights, so this PU multiplies: each clock with en high it adds
// w * din (w signed 8-bit, din unsigned 8-bit) to its net register; rstnet loads the bias.
// One PU computes one output node. dout is the full net register (no saturation), because
// the output values are only compared with each other.
// From the paper: 8-bit output weights, one neuron per PU, bias initialisation by rstnet.
// Own choices: the 26-bit net register (wide enough for 1022 products without overflow).
module out_pu
  import dnn_pkg::*;
#(
  parameter int unsigned NET_BITS = 26
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic                       rstnet,
  input  logic [SIG_W-1:0]           din,
  input  logic signed [OW_W-1:0]     w,
  input  logic signed [BIAS_W-1:0]   bias,
  output logic signed [NET_BITS-1:0] dout
);

  logic signed [OW_W+SIG_W:0] prod;

  assign prod = w * $signed({1'b0, din});

  always_ff @(posedge clk) begin
    if (rstnet)  dout <= NET_BITS'(bias);
    else if (en) dout <= dout + NET_BITS'(prod);
  end

endmodule
