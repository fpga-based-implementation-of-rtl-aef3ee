// pu: hidden-layer processing unit, multiplier-free.
//
// Each cycle with en high the PU adds w*din to its net register, where w is a 3-bit weight in
// -3..+3: the magnitude selects 0, din, 2*din (a shift) or 3*din (din + 2*din), and the sign
// bit negates the term, so no multiplier is used. rstnet loads the net register with Bias0 or
// Bias1 (chosen by sel), which is how one PU serves two nodes of its layer in two passes.
// dout is the net register saturated to 16 bits.
//
// Interface: din 8-bit unsigned, w {sign, magnitude[1:0]}, bias0/bias1 16-bit signed.
// Timing: one multiply-add per clock; dout is the registered net value (no extra latency).
// From the paper: the structure (sign select, 0/x/2x/3x select, adder, net register, bias
// mux and rstnet mux), the 16-bit bias and output, the 21-bit net register. Own choices: the
// sign-magnitude weight code, exact two's-complement negation, the en input (hold when low)
// and saturation of dout.
module pu
  import dnn_pkg::*;
#(
  parameter int unsigned NET_BITS = NET_W
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic                       rstnet,
  input  logic                       sel,
  input  logic [SIG_W-1:0]           din,
  input  logic [WQ_W-1:0]            w,
  input  logic signed [BIAS_W-1:0]   bias0,
  input  logic signed [BIAS_W-1:0]   bias1,
  output logic signed [PU_OUT_W-1:0] dout
);

  logic signed [NET_BITS-1:0] net;
  logic signed [SIG_W+2:0]    term;   // +-3*255 fits in 11 bits
  logic        [SIG_W+1:0]    mag_x;  // 0, x, 2x or 3x

  always_comb begin
    unique case (w[1:0])
      2'd0: mag_x = '0;
      2'd1: mag_x = {2'b00, din};
      2'd2: mag_x = {1'b0, din, 1'b0};
      2'd3: mag_x = {2'b00, din} + {1'b0, din, 1'b0};
    endcase
    term = w[2] ? -$signed({1'b0, mag_x}) : $signed({1'b0, mag_x});
  end

  always_ff @(posedge clk) begin
    if (rstnet)
      net <= NET_BITS'(sel ? bias1 : bias0);
    else if (en)
      net <= net + NET_BITS'(term);
  end

  assign dout = PU_OUT_W'(sat_s(48'(net), PU_OUT_W));

endmodule
