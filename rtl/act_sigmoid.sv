// act_sigmoid: logistic sigmoid activation unit, 8 bits in, 8 bits out, combinational.
//
// x is a signed Q4.4 number (-8.0 .. +7.9375); y = min(255, round(256 / (1 + exp(-x/16))))
// is the 8-bit unsigned fraction the next layer takes as input. The 256-entry truth table is
// computed at elaboration by a constant function and read without a clock, so synthesis
// turns it into a small ROM or LUT logic; there is no timing, the unit is purely
// combinational.
//
// From the paper: one activation unit per tile, combinational, 8-bit input and output.
// Own choices: the Q4.4 input format and the rounding. The paper builds a minimised
// sum-of-products of the truth table by hand; here synthesis is left to minimise it.
module act_sigmoid
  import dnn_pkg::*;
(
  input  logic signed [SIG_W-1:0] x,
  output logic        [SIG_W-1:0] y
);

  typedef logic [SIG_W-1:0] table_t [256];

  function automatic table_t make_table();
    table_t t;
    for (int i = 0; i < 256; i++) begin
      real v, r;
      int  q;
      v = real'((i >= 128) ? i - 256 : i) / 16.0;
      r = 256.0 / (1.0 + $exp(-v));
      q = int'($floor(r + 0.5));
      t[i] = (q > 255) ? 8'd255 : 8'(q);
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  assign y = TABLE[8'(x)];

endmodule
