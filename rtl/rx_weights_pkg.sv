// rx_weights_pkg: the hardwired weights and biases of the receiver network.
//
// A deployed receiver has fixed weights, so every weight is an
// elaboration-time constant: a multiplier by a constant power of two reduces
// to wiring, and no weight memory or programmable shifter is needed.
//
// The trained values are not available here. The functions below therefore
// produce a deterministic placeholder set that obeys the same codebooks:
//   weights: {0, +-2^q : |q| < K-1}
//   biases:  any K-bit fixed-point value (KI integer, KF fraction bits)
// Each value is drawn from a 32-bit integer hash h of (seed, layer, o, i):
//   weight is zero when h[2:0] == 0, negative when h[3] == 1, and its
//   exponent is q = QLO[layer] + h[9:8], clamped to |q| <= K-2,
//   with QLO = -2, -4, -3 for layers 1, 2, 3;
//   bias = ((h[23:16] mod 129) - 64) * 2^(KF-8), i.e. within +-0.25.
// To deploy a trained network, replace the bodies of weight_code and
// bias_lsb with a lookup of the trained codes; nothing else changes.
package rx_weights_pkg;

  import fxp_pkg::*;

  // 32-bit integer mix (xorshift-multiply), used as a repeatable hash.
  function automatic logic [31:0] mix32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] hash(input int seed, input int layer,
                                       input int o, input int i);
    return mix32(mix32(32'(seed) ^ (32'(layer) << 24)) ^ (32'(o) << 12) ^ 32'(i));
  endfunction

  // Weight code from input i to unit o of layer (1, 2 or 3) for a K-bit system.
  function automatic wcode_t weight_code(input int seed, input int layer,
                                         input int o, input int i, input int k);
    logic [31:0] h;
    int          qlo;
    int          q;
    wcode_t      c;
    h   = hash(seed, layer, o, i);
    qlo = (layer == 1) ? -2 : (layer == 2) ? -4 : -3;
    q   = qlo + int'(h[9:8]);
    if (q >  qmax(k)) q =  qmax(k);
    if (q < -qmax(k)) q = -qmax(k);
    c.nz  = (h[2:0] != 3'd0);
    c.neg = h[3];
    c.exp = EXP_W'(q);
    return c;
  endfunction

  // Bias of unit o of layer, in units of 2^-KF.
  function automatic int bias_lsb(input int seed, input int layer,
                                  input int o, input int kf);
    logic [31:0] h;
    int          b;
    h = hash(seed, layer + 16, o, 0);
    b = int'(32'(h[23:16]) % 32'd129) - 64;
    if (kf >= 8) b = b * (1 << (kf - 8));
    else         b = b / (1 << (8 - kf));
    return b;
  endfunction

endpackage
