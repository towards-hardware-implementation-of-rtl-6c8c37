// tb_c2r: checks the complex-to-real input stage. Sends messages of N random
// complex symbols, back to back and with idle gaps, and checks that each
// output vector is [Re(y_0..y_N-1), Im(y_0..y_N-1)], that out_valid comes
// exactly one clock after the N-th symbol, and that a message cut short by an
// early start-of-message marker is dropped with a resync pulse.
module tb_c2r;
  import fxp_pkg::*;

  localparam int N = 4;
  localparam int K = 14;

  logic                  clk = 0, rst_n = 0;
  logic                  in_valid = 0, in_sof = 0;
  logic signed [K-1:0]   in_re = '0, in_im = '0;
  logic                  out_valid, resync;
  logic [2*N-1:0][K-1:0] out_vec;

  int checks = 0, failures = 0;
  int n_msgs = 0, n_resync = 0, n_b2b = 0, n_gap = 0;
  int cycle = 0;

  // Expected vectors and the cycle they are due, in send order.
  logic [2*N-1:0][K-1:0] exp_q[$];
  int                    due_q[$];
  int                    exp_resync_q[$];

  c2r #(.N(N), .K(K)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor: compare every output with the queue.
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output at cycle %0d", cycle);
      end else begin
        logic [2*N-1:0][K-1:0] e;
        int d;
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (out_vec !== e || d != cycle) begin
          failures++;
          $display("FAIL at cycle %0d (due %0d): got %h expected %h", cycle, d, out_vec, e);
        end
      end
    end
    if (resync) begin
      checks++;
      n_resync++;
      if (exp_resync_q.size() == 0 || exp_resync_q.pop_front() != cycle) begin
        failures++;
        $display("FAIL unexpected resync at cycle %0d", cycle);
      end
    end
  end

  task automatic send_symbol(input logic signed [K-1:0] re, input logic signed [K-1:0] im,
                             input bit sof);
    in_valid = 1;
    in_sof   = sof;
    in_re    = re;
    in_im    = im;
    @(negedge clk);
    in_valid = 0;
    in_sof   = 0;
  endtask

  task automatic send_message(input bit gaps);
    logic [2*N-1:0][K-1:0] v;
    for (int n = 0; n < N; n++) begin
      v[n]     = K'($urandom);
      v[N + n] = K'($urandom);
      // Inputs change after a falling edge; the next rising edge, at which
      // the monitor still reads the current cycle number, takes them, and
      // the output is due one clock later.
      if (n == N - 1) begin
        exp_q.push_back(v);
        due_q.push_back(cycle + 1);
      end
      send_symbol(v[n], v[N + n], n == 0);
      if (gaps && n != N - 1) repeat ($urandom % 3) @(negedge clk);
    end
    n_msgs++;
    if (gaps) n_gap++; else n_b2b++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < 200; m++) begin
      if (m % 17 == 5) begin
        // Partial message of 1..N-1 symbols, then a new one: the partial one
        // is dropped and resync pulses one clock after the new first symbol.
        int len;
        len = 1 + ($urandom % (N - 1));
        for (int n = 0; n < len; n++) send_symbol(K'($urandom), K'($urandom), n == 0);
        exp_resync_q.push_back(cycle + 1);
      end
      send_message(m % 3 == 0);
      if (m % 5 == 0) repeat ($urandom % 4) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || exp_resync_q.size() != 0) begin
      failures++;
      $display("FAIL %0d outputs / %0d resyncs never came", exp_q.size(), exp_resync_q.size());
    end
    checks++;
    if (n_resync == 0 || n_b2b == 0 || n_gap == 0) failures++;
    $display("messages=%0d back_to_back=%0d with_gaps=%0d resyncs=%0d", n_msgs, n_b2b, n_gap, n_resync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
