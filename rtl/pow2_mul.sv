// pow2_mul: multiply a K-bit fixed-point operand by a power-of-two weight.
//
// With weights restricted to {0, +-2^q : |q| < K-1}, a multiplication is a
// zeroing, a bit shift and a sign change. The operand x and the product y
// share one format (K bits, KF of them fractional), so the product is x
// shifted by q places:
//   q < 0: arithmetic right shift by -q; the bits shifted out below the LSB
//          are lost (rounding toward minus infinity);
//   q > 0: left shift by q; a result outside the K-bit range saturates to the
//          largest or smallest K-bit value;
//   then, for a negative weight, the shifted value is negated, saturating
//   -(-2^(K-1)) to 2^(K-1)-1.
// The shift that loses low bits follows the paper's bit-shift picture. Shift
// before negate, floor rounding and saturation on overflow are this design's
// choices. sat is high when the product saturated.
//
// Purely combinational. Inside the dense layers the code input is a constant,
// so after synthesis an instance is only wiring plus, for negative weights,
// a negation.
module pow2_mul
  import fxp_pkg::*;
#(
  parameter int unsigned K = KI_DEF + KF_DEF + 1
) (
  input  logic signed [K-1:0] x,
  input  wcode_t              code,
  output logic signed [K-1:0] y,
  output logic                sat
);

  localparam int unsigned WW = 2 * K;  // room for a left shift of up to K-2

  localparam logic signed [K-1:0] YMAX = {1'b0, {(K-1){1'b1}}};
  localparam logic signed [K-1:0] YMIN = {1'b1, {(K-1){1'b0}}};

  logic signed [WW-1:0] wide;
  logic signed [K-1:0]  shifted;
  logic                 shift_sat;
  logic [EXP_W-1:0]     amount;

  always_comb begin
    amount    = code.exp[EXP_W-1] ? EXP_W'(-code.exp) : EXP_W'(code.exp);
    wide      = WW'(x);
    shift_sat = 1'b0;
    if (code.exp[EXP_W-1]) begin
      wide = wide >>> amount;
    end else begin
      wide = wide <<< amount;
    end
    // In range when every bit above K-1 equals the sign bit.
    if (wide > WW'(YMAX)) begin
      shifted   = YMAX;
      shift_sat = 1'b1;
    end else if (wide < WW'(YMIN)) begin
      shifted   = YMIN;
      shift_sat = 1'b1;
    end else begin
      shifted = wide[K-1:0];
    end

    if (!code.nz) begin
      y   = '0;
      sat = 1'b0;
    end else if (code.neg) begin
      if (shifted == YMIN) begin
        y   = YMAX;
        sat = 1'b1;
      end else begin
        y   = -shifted;
        sat = shift_sat;
      end
    end else begin
      y   = shifted;
      sat = shift_sat;
    end
  end

endmodule
