// tb_nn_receiver_full: end-to-end test of the receiver at its default size
// (N = 4 complex symbols, 8 -> 64 -> 32 -> 256 units, 14-bit fixed point).
//
// Sends messages of random received symbols, one symbol per clock, back to
// back and with idle gaps, and compares every decision, winning score and
// overflow flag with the reference model of the whole network. Checks that
// each decision comes exactly 5 clocks after the message's last symbol and
// that one message per N clocks is sustained. Each mechanism of the design
// must happen at least once, and is counted: back-to-back messages, gaps,
// resynchronisation on a cut-short message, ReLU clipping in each hidden
// layer, and saturation (overflow) of the fixed-point arithmetic.
module tb_nn_receiver_full;
  import fxp_pkg::*;

  localparam int N   = rx_pkg::N_DEF;
  localparam int M   = rx_pkg::M_DEF;
  localparam int H1  = rx_pkg::H1_DEF;
  localparam int H2  = rx_pkg::H2_DEF;
  localparam int KI  = KI_DEF;
  localparam int KF  = KF_DEF;
  localparam int K   = KI + KF + 1;
  localparam int IW  = $clog2(M);
  localparam int SEED = 1;
  localparam int LATENCY = 5;
  localparam int MSGS = 400;

  logic                clk = 0, rst_n = 0;
  logic                in_valid = 0, in_sof = 0;
  logic signed [K-1:0] in_re = '0, in_im = '0;
  logic                out_valid, overflow, resync;
  logic [IW-1:0]       m_hat;
  logic signed [K-1:0] score;

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_msgs = 0, n_b2b = 0, n_gap = 0, n_resync = 0, n_ovf = 0;
  int n_clip1 = 0, n_clip2 = 0;
  int first_out = -1, last_out = -1, n_out = 0;

  typedef struct {
    int idx;
    int val;
    bit ovf;
    int due;
  } exp_t;
  exp_t exp_q[$];
  int   resync_q[$];

  nn_receiver dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (MSGS * 12 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      n_out++;
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected decision at cycle %0d", cycle);
      end else begin
        exp_t e;
        e = exp_q.pop_front();
        if (int'(m_hat) != e.idx || int'(score) != e.val || overflow != e.ovf || cycle != e.due) begin
          failures++;
          if (failures < 10)
            $display("FAIL cycle %0d: m_hat=%0d score=%0d ovf=%0d, expected %0d %0d %0d due %0d",
                     cycle, m_hat, score, overflow, e.idx, e.val, e.ovf, e.due);
        end
        if (e.ovf) n_ovf++;
      end
    end
    if (resync) begin
      checks++;
      n_resync++;
      if (resync_q.size() == 0 || resync_q.pop_front() != cycle) begin
        failures++;
        $display("FAIL unexpected resync at cycle %0d", cycle);
      end
    end
  end

  // Whole-network reference for one message of 2N reals [Re..., Im...].
  function automatic exp_t reference(input int x0[]);
    int   x1[], x2[], x3[];
    bit   s;
    int   c1, c2, c3;
    exp_t e;
    c1 = 0; c2 = 0; c3 = 0;
    s  = rx_ref_pkg::dense(SEED, 1, 2 * N, H1, 1, 1, KI, KF, x0, x1, c1);
    s |= rx_ref_pkg::dense(SEED, 2, H1, H2, 1, 1, KI, KF, x1, x2, c2);
    s |= rx_ref_pkg::dense(SEED, 3, H2, M, 0, 0, KI, KF, x2, x3, c3);
    n_clip1 += c1;
    n_clip2 += c2;
    e.idx = rx_ref_pkg::argmax(x3);
    e.val = x3[e.idx];
    e.ovf = s;
    return e;
  endfunction

  // Symbol values: mostly within +-2^(range_bits-1) LSBs.
  function automatic int rnd(input int range_bits);
    return int'($urandom % (1 << range_bits)) - (1 << (range_bits - 1));
  endfunction

  task automatic send_symbol(input int re, input int im, input bit sof);
    in_valid = 1;
    in_sof   = sof;
    in_re    = K'(re);
    in_im    = K'(im);
    @(negedge clk);
    in_valid = 0;
    in_sof   = 0;
  endtask

  task automatic send_message(input int range_bits, input bit gaps);
    int   x0[];
    exp_t e;
    x0 = new[2 * N];
    for (int i = 0; i < 2 * N; i++) x0[i] = rnd(range_bits);
    e = reference(x0);
    for (int n = 0; n < N; n++) begin
      if (n == N - 1) begin
        // Taken at the next rising edge (current cycle number), decided
        // LATENCY clocks later.
        e.due = cycle + LATENCY;
        exp_q.push_back(e);
      end
      send_symbol(x0[n], x0[N + n], n == 0);
      if (gaps && n != N - 1) repeat ($urandom % 3) @(negedge clk);
    end
    n_msgs++;
    if (gaps) n_gap++; else n_b2b++;
  endtask

  initial begin
    int b2b_start, b2b_count;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < MSGS; m++) begin
      if (m % 23 == 11) begin
        int len;
        len = 1 + ($urandom % (N - 1));
        for (int n = 0; n < len; n++) send_symbol(rnd(10), rnd(10), n == 0);
        resync_q.push_back(cycle + 1);
      end
      // Symbol ranges: realistic (+-2 .. +-8) and, now and then, full scale.
      send_message((m % 9 == 4) ? 14 : 9 + (m % 3), (m % 4) == 1);
      if (m % 6 == 0) repeat ($urandom % 3) @(negedge clk);
    end
    repeat (LATENCY + 2) @(negedge clk);

    // Throughput: a burst of back-to-back messages must give one decision
    // every N clocks.
    first_out = -1;
    n_out     = 0;
    b2b_count = 32;
    for (int m = 0; m < b2b_count; m++) send_message(10, 0);
    repeat (LATENCY + 2) @(negedge clk);
    checks++;
    if (n_out != b2b_count || last_out - first_out != N * (b2b_count - 1)) begin
      failures++;
      $display("FAIL burst: %0d decisions over %0d clocks", n_out, last_out - first_out);
    end

    checks++;
    if (exp_q.size() != 0 || resync_q.size() != 0) begin
      failures++;
      $display("FAIL %0d decisions / %0d resyncs never came", exp_q.size(), resync_q.size());
    end
    checks++;
    if (n_b2b == 0)    begin failures++; $display("FAIL no back-to-back messages"); end
    checks++;
    if (n_gap == 0)    begin failures++; $display("FAIL no messages with gaps"); end
    checks++;
    if (n_resync == 0) begin failures++; $display("FAIL no resync"); end
    checks++;
    if (n_ovf == 0)    begin failures++; $display("FAIL no overflow"); end
    checks++;
    if (n_clip1 == 0 || n_clip2 == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    $display("messages=%0d back_to_back=%0d with_gaps=%0d resyncs=%0d overflows=%0d relu_clips_l1=%0d relu_clips_l2=%0d",
             n_msgs, n_b2b, n_gap, n_resync, n_ovf, n_clip1, n_clip2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
