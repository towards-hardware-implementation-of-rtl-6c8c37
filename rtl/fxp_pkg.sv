// fxp_pkg: fixed-point number format and weight-code type shared by the
// receiver datapath.
//
// Numbers are K = KI + KF + 1 bit two's-complement integers with an implicit
// scale of 2^-KF (KI integer bits, KF fraction bits, one sign bit). The
// defaults KI = 5, KF = 8 (K = 14) are the configuration the receiver is built
// for. Storing negative values in two's complement, rather than as sign and
// magnitude, is a choice of this design.
//
// Weights come from the codebook {0, +-2^q : |q| < K-1}. A weight is held as
// a code: a non-zero flag, a sign and a signed exponent q. The exponent field
// is 6 bits, enough for K up to 33.
package fxp_pkg;

  // Default fixed-point split: integer and fraction bits.
  localparam int unsigned KI_DEF = 5;
  localparam int unsigned KF_DEF = 8;

  // Width of the exponent field of a weight code.
  localparam int unsigned EXP_W = 6;

  // One power-of-two weight: value = nz ? (neg ? -1 : +1) * 2^exp : 0.
  typedef struct packed {
    logic                    nz;
    logic                    neg;
    logic signed [EXP_W-1:0] exp;
  } wcode_t;

  // Largest exponent magnitude allowed for a K-bit system (|q| < K-1).
  function automatic int qmax(input int k);
    return k - 2;
  endfunction

endpackage
