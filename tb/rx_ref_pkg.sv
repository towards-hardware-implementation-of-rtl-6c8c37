// rx_ref_pkg: reference model of the receiver arithmetic for the testbenches.
//
// Written with real-number scaling (x * 2.0**q followed by floor) and plain
// integer sums, independently of the shift-based RTL. The numeric rules it
// models: products are floor(x * 2^q) saturated to K bits and then negated
// for a negative weight (saturating); unit outputs are the exact sum of the
// products and the bias, saturated to K bits, then ReLU when enabled.
package rx_ref_pkg;

  import fxp_pkg::*;

  function automatic int kmax(input int k);
    return (1 << (k - 1)) - 1;
  endfunction

  function automatic int kmin(input int k);
    return -(1 << (k - 1));
  endfunction

  // Product of x by a weight code; sat reports saturation.
  function automatic int mul(input int x, input wcode_t c, input int k, output bit sat);
    real r;
    int  v;
    sat = 0;
    if (!c.nz) return 0;
    r = $floor(real'(x) * (2.0 ** real'(int'(c.exp))));
    if (r > real'(kmax(k)))      begin v = kmax(k); sat = 1; end
    else if (r < real'(kmin(k))) begin v = kmin(k); sat = 1; end
    else v = int'(r);
    if (c.neg) begin
      v = -v;
      if (v > kmax(k)) begin v = kmax(k); sat = 1; end
    end
    return v;
  endfunction

  // One dense layer; x and y hold signed integers in LSB units.
  // Returns 1 when anything saturated. relu_clips counts units cut by ReLU.
  function automatic bit dense(input int seed, input int layer, input int nin,
                               input int nout, input bit relu, input bit has_bias,
                               input int ki, input int kf, input int x[],
                               output int y[], inout int relu_clips);
    int k;
    bit any_sat;
    k = ki + kf + 1;
    any_sat = 0;
    y = new[nout];
    for (int o = 0; o < nout; o++) begin
      longint acc;
      bit s;
      acc = has_bias ? longint'(rx_weights_pkg::bias_lsb(seed, layer, o, kf)) : 64'sd0;
      for (int i = 0; i < nin; i++) begin
        acc += longint'(mul(x[i], rx_weights_pkg::weight_code(seed, layer, o, i, k), k, s));
        any_sat |= s;
      end
      if (acc > longint'(kmax(k))) begin acc = longint'(kmax(k)); any_sat = 1; end
      if (acc < longint'(kmin(k))) begin acc = longint'(kmin(k)); any_sat = 1; end
      if (relu && acc < 0) begin acc = 0; relu_clips++; end
      y[o] = int'(acc);
    end
    return any_sat;
  endfunction

  // Index of the largest value, lowest index on ties.
  function automatic int argmax(input int v[]);
    int best;
    best = 0;
    for (int i = 1; i < v.size(); i++) if (v[i] > v[best]) best = i;
    return best;
  endfunction

endpackage
