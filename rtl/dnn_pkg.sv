// dnn_pkg: word lengths, fixed-point formats and the controller state type shared by the
// DNN accelerator.
//
// Signals between layers are 8-bit unsigned fractions (value = code/256): pixels and sigmoid
// outputs alike. Hidden-layer weights are 3-bit sign-magnitude codes {sign, |w|} with |w| in
// 0..3, so a weight is one of -3..+3 times the layer's step size Delta. Output-layer weights
// are 8-bit two's complement. The 8-bit word-lengths, the 3-bit and 8-bit weights, the 16-bit
// biases/PU outputs and the 21-bit net register follow the paper; the sign-magnitude weight
// code and the fraction formats are this design's own choices.
package dnn_pkg;

  localparam int unsigned SIG_W     = 8;   // inter-tile signal word-length
  localparam int unsigned WQ_W      = 3;   // hidden-tile weight code
  localparam int unsigned BIAS_W    = 16;  // bias word-length
  localparam int unsigned PU_OUT_W  = 16;  // PU output (Dout) word-length
  localparam int unsigned NET_W     = 21;  // net (accumulation) register width
  localparam int unsigned OW_W      = 8;   // output-tile weight word-length
  localparam int unsigned DELTA_W   = 8;   // Delta coefficient, unsigned, code/256
  localparam int unsigned DELTA_SH  = 12;  // shift that turns net*Delta into a Q4.4 sigmoid input
  localparam int unsigned LD_W      = 32;  // width of the parameter-load data path

  // Kinds of parameter the load port writes.
  typedef enum logic [1:0] {
    LD_WEIGHT = 2'd0,
    LD_BIAS   = 2'd1,
    LD_DELTA  = 2'd2
  } ld_kind_e;

  // Controller states, named as in the timing diagram.
  typedef enum logic [2:0] {
    S_IDLE = 3'd0,
    S_RST0 = 3'd1,
    S_RUN0 = 3'd2,
    S_RST1 = 3'd3,
    S_RUN1 = 3'd4,
    S_NEXT = 3'd5
  } ctrl_state_e;

  // Signed saturation of a wide value to N bits.
  function automatic logic signed [31:0] sat_s(input logic signed [47:0] v, input int unsigned n);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (n - 1)) - 48'sd1;
    lo = -(48'sd1 <<< (n - 1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

endpackage
