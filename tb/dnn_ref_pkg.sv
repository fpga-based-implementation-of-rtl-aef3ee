// dnn_ref_pkg: reference arithmetic for the testbenches, written from the number formats
// alone (not from the RTL): sigmoid from exp(), saturation, Delta scaling.
package dnn_ref_pkg;

  function automatic int sat(input longint v, input int bits);
    longint hi, lo;
    hi = (64'sd1 <<< (bits - 1)) - 1;
    lo = -(64'sd1 <<< (bits - 1));
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  // y = min(255, round(256 / (1 + exp(-x/16)))), x signed Q4.4
  function automatic int sig_ref(input int x);
    real r;
    int  y;
    r = 256.0 / (1.0 + $exp(-real'(x) / 16.0));
    y = int'($floor(r + 0.5));
    return (y > 255) ? 255 : y;
  endfunction

  // value of a 3-bit sign-magnitude weight code
  function automatic int wq_val(input int code);
    int m;
    m = code & 3;
    return (code & 4) ? -m : m;
  endfunction

  // hidden-node output: 16-bit saturation, x Delta >>> 12, saturation to 8 bits, sigmoid
  function automatic int hid_out(input longint acc, input int delta);
    longint d16;
    longint sc;
    d16 = sat(acc, 16);
    sc  = (d16 * delta) >>> 12;
    return sig_ref(sat(sc, 8));
  endfunction

endpackage
