// rx_kf_check: drives one reduced-size receiver built with KF fraction bits
// and checks every decision, winning score and overflow flag against the
// reference model. Used by tb_nn_receiver_kf for several formats at once.
// Symbols are random within +-4 (in real terms), scaled to the format.
module rx_kf_check #(
  parameter int KF   = 8,
  parameter int MSGS = 150
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   overflows
);
  localparam int N  = 4;
  localparam int M  = 32;
  localparam int H1 = 16;
  localparam int H2 = 8;
  localparam int KI = 5;
  localparam int K  = KI + KF + 1;
  localparam int IW = $clog2(M);
  localparam int SEED = 1;

  logic                in_valid = 0, in_sof = 0;
  logic signed [K-1:0] in_re = '0, in_im = '0;
  logic                out_valid, overflow, resync;
  logic [IW-1:0]       m_hat;
  logic signed [K-1:0] score;

  typedef struct {
    int idx;
    int val;
    bit ovf;
  } exp_t;
  exp_t exp_q[$];

  nn_receiver #(.N(N), .M(M), .H1(H1), .H2(H2), .KI(KI), .KF(KF), .SEED(SEED)) dut (.*);

  initial begin
    done = 0; checks = 0; failures = 0; overflows = 0;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
    end else begin
      e = exp_q.pop_front();
      if (int'(m_hat) != e.idx || int'(score) != e.val || overflow != e.ovf) begin
        failures++;
        if (failures < 5)
          $display("FAIL KF=%0d: m_hat=%0d score=%0d ovf=%0d expected %0d %0d %0d",
                   KF, m_hat, score, overflow, e.idx, e.val, e.ovf);
      end
      if (e.ovf) overflows++;
    end
  end

  initial begin
    int x0[], x1[], x2[], x3[];
    int clips;
    exp_t e;
    x0 = new[2 * N];
    @(posedge rst_n);
    @(negedge clk);
    for (int m = 0; m < MSGS; m++) begin
      // +-4.0 in real terms is +-2^(KF+2) LSBs; every 10th message full scale.
      for (int i = 0; i < 2 * N; i++)
        x0[i] = int'($urandom % (1 << ((m % 10 == 3) ? K : KF + 3))) - (1 << (((m % 10 == 3) ? K : KF + 3) - 1));
      clips = 0;
      e.ovf  = rx_ref_pkg::dense(SEED, 1, 2 * N, H1, 1, 1, KI, KF, x0, x1, clips);
      e.ovf |= rx_ref_pkg::dense(SEED, 2, H1, H2, 1, 1, KI, KF, x1, x2, clips);
      e.ovf |= rx_ref_pkg::dense(SEED, 3, H2, M, 0, 0, KI, KF, x2, x3, clips);
      e.idx  = rx_ref_pkg::argmax(x3);
      e.val  = x3[e.idx];
      exp_q.push_back(e);
      for (int n = 0; n < N; n++) begin
        in_valid = 1;
        in_sof   = (n == 0);
        in_re    = K'(x0[n]);
        in_im    = K'(x0[N + n]);
        @(negedge clk);
      end
      in_valid = 0;
      in_sof   = 0;
    end
    repeat (8) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    done = 1;
  end
endmodule
