// c2r: complex-to-real input stage of the receiver.
//
// The channel delivers a message as N complex symbols, one after another. This
// stage collects them and presents the 2N real numbers the first dense layer
// takes, ordered as all real parts, then all imaginary parts:
//   out_vec[n] = Re(y_n), out_vec[N+n] = Im(y_n), n = 0..N-1.
// Mapping N complex symbols to 2N reals is the paper's; the serial arrival of
// symbols, this ordering and the framing below are this design's choices.
//
// Interface: one symbol (in_re, in_im, K-bit fixed point) is taken on each
// clock with in_valid high. in_sof marks the first symbol of a message; a
// message cut short by an early in_sof is dropped and flagged by a one-cycle
// resync pulse. Symbols without in_sof continue the current message.
// Timing: out_valid pulses for one cycle, one clock after the N-th symbol,
// with out_vec holding the message. A new message may follow at once, so the
// stage takes one message every N clocks.
module c2r
  import fxp_pkg::*;
#(
  parameter int unsigned N = 4,
  parameter int unsigned K = KI_DEF + KF_DEF + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  logic signed [K-1:0]         in_re,
  input  logic signed [K-1:0]         in_im,
  output logic                        out_valid,
  output logic [2*N-1:0][K-1:0]       out_vec,
  output logic                        resync
);

  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1;

  logic [CW-1:0]          cnt;       // index of the next symbol of the message
  logic [N-1:0][K-1:0]    re_q;
  logic [N-1:0][K-1:0]    im_q;
  logic [CW-1:0]          idx;

  always_comb idx = in_sof ? '0 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      resync    <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      resync    <= 1'b0;
      if (in_valid) begin
        resync <= in_sof && (cnt != '0);
        if (32'(idx) == N - 1) begin
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          cnt <= idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      re_q[idx] <= in_re;
      im_q[idx] <= in_im;
      if (32'(idx) == N - 1) begin
        for (int n = 0; n < N; n++) begin
          out_vec[n]     <= (n == N - 1) ? in_re : re_q[n];
          out_vec[N + n] <= (n == N - 1) ? in_im : im_q[n];
        end
      end
    end
  end

endmodule
