// tb_pow2_mul: checks the power-of-two multiplier against the reference
// model for every exponent |q| <= K-2, both signs, zero weights and random
// and extreme operands. Counts saturated products and right shifts that
// lose bits, and fails if either never happened.
module tb_pow2_mul;
  import fxp_pkg::*;

  localparam int K = 14;

  logic signed [K-1:0] x, y;
  wcode_t              code;
  logic                sat;
  int checks = 0, failures = 0;
  int n_sat = 0, n_lost = 0;

  pow2_mul #(.K(K)) dut (.x, .code, .y, .sat);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int xv, input bit nz, input bit neg, input int q);
    int exp_v;
    bit exp_s;
    x        = K'(xv);
    code.nz  = nz;
    code.neg = neg;
    code.exp = EXP_W'(q);
    #1;
    exp_v = rx_ref_pkg::mul(xv, code, K, exp_s);
    checks++;
    if (int'(y) != exp_v || sat != exp_s) begin
      failures++;
      if (failures < 10)
        $display("FAIL x=%0d nz=%0d neg=%0d q=%0d: y=%0d sat=%0d, expected %0d %0d",
                 xv, nz, neg, q, y, sat, exp_v, exp_s);
    end
    if (exp_s) n_sat++;
    if (nz && q < 0 && (xv % (1 << -q)) != 0) n_lost++;
  endtask

  initial begin
    int edge_vals[] = '{0, 1, -1, 2, -2, 8191, -8192, 4096, -4096, 107, -107};
    // Fig. 3 example: 01101011 times 2^-3 gives 00001101.
    check_one(107, 1, 0, -3);
    checks++;
    if (y != 14'sd13) failures++;
    for (int q = -(K - 2); q <= K - 2; q++) begin
      foreach (edge_vals[j]) begin
        for (int s = 0; s < 2; s++) check_one(edge_vals[j], 1, s[0], q);
        check_one(edge_vals[j], 0, 0, q);
      end
      for (int r = 0; r < 200; r++) begin
        int xv;
        xv = int'($signed(K'($urandom)));
        check_one(xv, ($urandom % 8) != 0, $urandom % 2, q);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: no saturation seen"); end
    checks++;
    if (n_lost == 0) begin failures++; $display("FAIL: no lost bits seen"); end
    $display("saturations=%0d lossy_right_shifts=%0d", n_sat, n_lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
