// tb_nn_receiver_kf: runs the receiver in the four fixed-point formats of
// the reference study, KI = 5 integer bits with KF = 2, 4, 8 and 12 fraction
// bits (K = 8, 10, 14 and 18 bits), at a reduced size (8 -> 16 -> 8 -> 32).
// Each format is checked against the reference model by rx_kf_check; the
// shift rules, the weight codebook limit |q| <= K-2 and the bias scaling all
// change with K. Fails if any format never saturates.
module tb_nn_receiver_kf;
  logic clk = 0, rst_n = 0;
  logic done[4];
  int   checks[4], failures[4], overflows[4];
  int   tot_checks, tot_failures;

  rx_kf_check #(.KF(2))  u_kf2  (.clk, .rst_n, .done(done[0]), .checks(checks[0]), .failures(failures[0]), .overflows(overflows[0]));
  rx_kf_check #(.KF(4))  u_kf4  (.clk, .rst_n, .done(done[1]), .checks(checks[1]), .failures(failures[1]), .overflows(overflows[1]));
  rx_kf_check #(.KF(8))  u_kf8  (.clk, .rst_n, .done(done[2]), .checks(checks[2]), .failures(failures[2]), .overflows(overflows[2]));
  rx_kf_check #(.KF(12)) u_kf12 (.clk, .rst_n, .done(done[3]), .checks(checks[3]), .failures(failures[3]), .overflows(overflows[3]));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2] + checks[3],
             failures[0] + failures[1] + failures[2] + failures[3] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    tot_checks   = 0;
    tot_failures = 0;
    for (int f = 0; f < 4; f++) begin
      tot_checks   += checks[f] + 1;
      tot_failures += failures[f];
      if (overflows[f] == 0) tot_failures++;
      $display("KF=%0d: decisions checked=%0d failures=%0d overflows=%0d",
               f == 0 ? 2 : f == 1 ? 4 : f == 2 ? 8 : 12, checks[f], failures[f], overflows[f]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", tot_checks, tot_failures);
    $finish;
  end
endmodule
