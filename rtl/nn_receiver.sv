// nn_receiver: neural-network receiver for M messages sent over N complex
// channel uses, in K-bit fixed-point arithmetic with power-of-two weights.
//
// Datapath (all stages registered, all layers fully parallel):
//   c2r          N serial complex symbols -> 2N reals [Re..., Im...]
//   dense_layer  2N -> H1 units, bias, ReLU          (layer 1)
//   dense_layer  H1 -> H2 units, bias, ReLU          (layer 2)
//   dense_layer  H2 -> M units, no bias, no activation: pre-activations
//   argmax       index of the largest pre-activation = decided message
// Softmax is not built: the largest pre-activation gives the same decision.
// The layer sizes (8 -> 64 -> 32 -> 256), ReLU, the missing output bias, the
// weight codebook {0, +-2^q : |q| < K-1}, K-bit biases and the 14-bit format
// (KI = 5, KF = 8) are the paper's. The pipelining, serial symbol input,
// saturating overflow handling and the placeholder weight set (rx_weights_pkg,
// selected by SEED) are this design's.
//
// Interface: one complex symbol per clock with in_valid, in_sof on the first
// symbol of each message (see c2r). Per message, out_valid pulses once with
// m_hat (0..M-1), score (the winning pre-activation) and overflow, which is
// set when any product or unit output on the message's path saturated.
// resync pulses when a partial message was dropped.
// Timing: m_hat appears 5 clocks after the message's last symbol is taken;
// messages may be sent back to back, one every N clocks.
module nn_receiver
  import fxp_pkg::*;
#(
  parameter int unsigned N    = rx_pkg::N_DEF,
  parameter int unsigned M    = rx_pkg::M_DEF,
  parameter int unsigned H1   = rx_pkg::H1_DEF,
  parameter int unsigned H2   = rx_pkg::H2_DEF,
  parameter int unsigned KI   = KI_DEF,
  parameter int unsigned KF   = KF_DEF,
  parameter int          SEED = 1,
  localparam int unsigned K   = KI + KF + 1,
  localparam int unsigned IW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_sof,
  input  logic signed [K-1:0] in_re,
  input  logic signed [K-1:0] in_im,
  output logic                out_valid,
  output logic [IW-1:0]       m_hat,
  output logic signed [K-1:0] score,
  output logic                overflow,
  output logic                resync
);

  logic                  v0, v1, v2, v3;
  logic                  s1, s2, s3;
  logic [2*N-1:0][K-1:0] x0;
  logic [H1-1:0][K-1:0]  x1;
  logic [H2-1:0][K-1:0]  x2;
  logic [M-1:0][K-1:0]   x3;

  c2r #(.N(N), .K(K)) u_c2r (
    .clk, .rst_n,
    .in_valid, .in_sof, .in_re, .in_im,
    .out_valid (v0),
    .out_vec   (x0),
    .resync
  );

  dense_layer #(
    .IN(2*N), .OUT(H1), .LAYER(1), .RELU(1'b1), .HAS_BIAS(1'b1),
    .KI(KI), .KF(KF), .SEED(SEED)
  ) u_dense1 (
    .clk, .rst_n,
    .in_valid (v0), .in_sat (1'b0), .in_vec (x0),
    .out_valid (v1), .out_sat (s1), .out_vec (x1)
  );

  dense_layer #(
    .IN(H1), .OUT(H2), .LAYER(2), .RELU(1'b1), .HAS_BIAS(1'b1),
    .KI(KI), .KF(KF), .SEED(SEED)
  ) u_dense2 (
    .clk, .rst_n,
    .in_valid (v1), .in_sat (s1), .in_vec (x1),
    .out_valid (v2), .out_sat (s2), .out_vec (x2)
  );

  dense_layer #(
    .IN(H2), .OUT(M), .LAYER(3), .RELU(1'b0), .HAS_BIAS(1'b0),
    .KI(KI), .KF(KF), .SEED(SEED)
  ) u_dense3 (
    .clk, .rst_n,
    .in_valid (v2), .in_sat (s2), .in_vec (x2),
    .out_valid (v3), .out_sat (s3), .out_vec (x3)
  );

  argmax #(.M(M), .K(K)) u_argmax (
    .clk, .rst_n,
    .in_valid (v3), .in_sat (s3), .in_vec (x3),
    .out_valid, .out_sat (overflow), .out_idx (m_hat), .out_max (score)
  );

endmodule
