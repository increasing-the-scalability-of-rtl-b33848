// gcn_ref_pkg: plain integer reference arithmetic for the testbenches of the
// two-step graph convolution, written independently of the RTL.
package gcn_ref_pkg;

  // requantisation: round half up, arithmetic shift, saturate to int8
  function automatic int ref_requant(input longint acc, input longint mult, input int shift);
    longint p;
    p = acc * mult;
    if (shift > 0) p = p + (longint'(1) << (shift - 1));
    p = p >>> shift;
    if (p > 127)  return 127;
    if (p < -128) return -128;
    return int'(p);
  endfunction

  // ReLU followed by the clamp to the int8 range
  function automatic int ref_relu(input int v);
    if (v < 0)   return 0;
    if (v > 127) return 127;
    return v;
  endfunction

  // random signed byte
  function automatic int rnd_s8();
    return int'($urandom_range(255)) - 128;
  endfunction

endpackage
