// dense_layer: fully connected layer with hardwired power-of-two weights.
//
// Each of the OUT units computes
//   a_o = sum_i w(o,i) * x_i  (+ b_o when HAS_BIAS)
// where every weight is a constant from {0, +-2^q : |q| < K-1}, so each
// product is a pow2_mul instance with a constant code, i.e. wiring. The
// IN products (each already a K-bit number) and the bias are added exactly in
// a wide accumulator; the sum is then saturated to K bits and, when RELU is
// set, negative values are replaced by zero. Weights and biases come from
// rx_weights_pkg, indexed by LAYER and SEED.
// The layer structure, the weight and bias codebooks, ReLU and the absence of
// a bias in the output layer are the paper's. Exact accumulation followed by
// one saturation per unit is this design's choice.
//
// Interface: in_vec/in_valid/in_sat in, out_vec/out_valid/out_sat out; sat
// flags travel with the data and are set when any product or unit output of
// this or an earlier layer saturated.
// Timing: fully parallel, one register stage: a vector accepted on one clock
// appears at the output on the next, and a new vector may enter every clock.
module dense_layer
  import fxp_pkg::*;
#(
  parameter int unsigned IN       = 8,
  parameter int unsigned OUT      = 64,
  parameter int unsigned LAYER    = 1,
  parameter bit          RELU     = 1'b1,
  parameter bit          HAS_BIAS = 1'b1,
  parameter int unsigned KI       = KI_DEF,
  parameter int unsigned KF       = KF_DEF,
  parameter int          SEED     = 1,
  localparam int unsigned K       = KI + KF + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_sat,
  input  logic [IN-1:0][K-1:0]   in_vec,
  output logic                   out_valid,
  output logic                   out_sat,
  output logic [OUT-1:0][K-1:0]  out_vec
);

  localparam int unsigned ACCW = K + $clog2(IN + 1) + 1;

  localparam logic signed [ACCW-1:0] AMAX = ACCW'((2 ** (K - 1)) - 1);
  localparam logic signed [ACCW-1:0] AMIN = -ACCW'(2 ** (K - 1));

  logic [OUT-1:0][IN-1:0][K-1:0] prod;
  logic [OUT-1:0][IN-1:0]        prod_sat;
  logic [OUT-1:0][K-1:0]         unit_out;
  logic [OUT-1:0]                unit_sat;

  for (genvar o = 0; o < OUT; o++) begin : g_unit
    for (genvar i = 0; i < IN; i++) begin : g_in
      localparam wcode_t W = rx_weights_pkg::weight_code(SEED, LAYER, o, i, K);
      pow2_mul #(.K(K)) u_mul (
        .x    (in_vec[i]),
        .code (W),
        .y    (prod[o][i]),
        .sat  (prod_sat[o][i])
      );
    end

    localparam int BIAS = HAS_BIAS ? rx_weights_pkg::bias_lsb(SEED, LAYER, o, KF) : 0;

    logic signed [ACCW-1:0] acc;
    always_comb begin
      acc = ACCW'(BIAS);
      for (int i = 0; i < IN; i++) begin
        acc += ACCW'($signed(prod[o][i]));
      end
      unit_sat[o] = 1'b0;
      if (acc > AMAX) begin
        acc         = AMAX;
        unit_sat[o] = 1'b1;
      end else if (acc < AMIN) begin
        acc         = AMIN;
        unit_sat[o] = 1'b1;
      end
      if (RELU && acc < 0) acc = '0;
      unit_out[o] = acc[K-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sat   <= in_valid && (in_sat || (|prod_sat) || (|unit_sat));
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_vec <= unit_out;
  end

endmodule
