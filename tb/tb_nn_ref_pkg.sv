// tb_nn_ref_pkg -- reference model of the layer-multiplexed MLP for the
// testbenches.
//
// Written separately from the RTL: values are held in 128-bit integers, the
// tanh table address is found with real arithmetic (floor of the position
// in units of the table step) rather than by shifting, and the network is
// evaluated layer by layer as plain matrix-vector products. A double-
// precision model of the same network (same quantised weights, exact tanh,
// no rounding or saturation) is provided for signal-to-noise measurements.
package tb_nn_ref_pkg;

  typedef logic signed [127:0] wide_t;

  // Saturate to a signed dw-bit range
  function automatic wide_t sat(input wide_t v, input int dw);
    wide_t hi, lo;
    hi = (wide_t'(1) <<< (dw - 1)) - 1;
    lo = -hi - 1;
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Sign-extend the low dw bits of v
  function automatic wide_t sext(input wide_t v, input int dw);
    wide_t m;
    m = wide_t'(1) <<< (dw - 1);
    v = v & ((wide_t'(1) <<< dw) - 1);
    return (v ^ m) - m;
  endfunction

  function automatic real to_real(input wide_t v, input int fw);
    return real'(longint'(v)) / (2.0 ** fw);
  endfunction

  // Table tanh: 2**aw entries over [-2**rl2, 2**rl2), centre-sampled
  function automatic wide_t tanh_q(input wide_t z, input int dw, input int fw,
                                   input int aw_req, input int rl2);
    int    aw, depth;
    real   range, step, x, pos, v, max_pos;
    longint idx;
    aw      = (aw_req < fw + rl2 + 1) ? aw_req : fw + rl2 + 1;
    depth   = 1 << aw;
    range   = 2.0 ** rl2;
    step    = 2.0 * range / real'(depth);
    x       = to_real(z, fw);
    pos     = $floor((x + range) / step);
    if (pos < 0.0)                pos = 0.0;
    if (pos > real'(depth - 1))   pos = real'(depth - 1);
    idx     = longint'(pos);
    v       = $tanh((real'(idx) + 0.5) * step - range) * (2.0 ** fw);
    max_pos = 2.0 ** (dw - 1) - 1.0;
    if (v > max_pos)  v = max_pos;
    if (v < -max_pos) v = -max_pos;
    return wide_t'(longint'(v));
  endfunction

  // One node: f(sum_j w_j x_j + b), rescaled, saturated; linear without bias
  // when out_layer is set
  function automatic wide_t node_q(input wide_t x[], input wide_t w[], input wide_t b,
                                   input bit out_layer, input int dw, input int fw,
                                   input int aw, input int rl2);
    wide_t s, z;
    s = 0;
    foreach (x[j]) s += x[j] * w[j];
    if (!out_layer) s += b <<< fw;
    z = sat(s >>> fw, dw);
    return out_layer ? z : tanh_q(z, dw, fw, aw, rl2);
  endfunction

  // Word index of w[k][i][j] (j = m for the bias) in the weight image
  function automatic int widx(input int k, input int i, input int j, input int m);
    return (k * m + i) * (m + 1) + j;
  endfunction

endpackage
