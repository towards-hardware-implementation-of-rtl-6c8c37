// tb_dense_layer: checks the dense layer in two configurations against the
// reference model: a hidden layer (8 inputs, 64 units, bias, ReLU; the
// default parameters) and an output-layer slice (32 inputs, 16 units, no bias,
// no activation). Inputs range from small values to full-scale ones, so that
// ReLU clipping and saturation both occur; each must be seen at least once.
// Checks that results appear one clock after the input and that a new vector
// can enter every clock.
module tb_dense_layer;
  import fxp_pkg::*;

  localparam int KI   = 5;
  localparam int KF   = 8;
  localparam int K    = KI + KF + 1;
  localparam int SEED = 1;

  localparam int IA = 8,  OA = 64;   // hidden layer 1
  localparam int IB = 32, OB = 16;   // output layer slice

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sat = 0;
  logic [IA-1:0][K-1:0] xa = '0;
  logic [IB-1:0][K-1:0] xb = '0;
  logic va, sa, vb, sb;
  logic [OA-1:0][K-1:0] ya;
  logic [OB-1:0][K-1:0] yb;

  int checks = 0, failures = 0;
  int n_relu = 0, n_sat = 0;

  typedef struct {
    int a[];
    int b[];
    bit sat_a;
    bit sat_b;
  } exp_t;
  exp_t exp_q[$];

  dense_layer dut_a (
    .clk, .rst_n, .in_valid, .in_sat, .in_vec (xa),
    .out_valid (va), .out_sat (sa), .out_vec (ya)
  );

  dense_layer #(
    .IN(IB), .OUT(OB), .LAYER(3), .RELU(1'b0), .HAS_BIAS(1'b0),
    .KI(KI), .KF(KF), .SEED(SEED)
  ) dut_b (
    .clk, .rst_n, .in_valid, .in_sat (1'b0), .in_vec (xb),
    .out_valid (vb), .out_sat (sb), .out_vec (yb)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid_d = 0;
  always @(posedge clk) if (rst_n) begin
    in_valid_d <= in_valid;
    checks++;
    if (va != in_valid_d || vb != in_valid_d) begin
      failures++;
      $display("FAIL out_valid %0d/%0d one clock after in_valid=%0d", va, vb, in_valid_d);
    end
    if (va) begin
      exp_t e;
      e = exp_q.pop_front();
      for (int o = 0; o < OA; o++) begin
        checks++;
        if (int'($signed(ya[o])) != e.a[o]) begin
          failures++;
          if (failures < 10) $display("FAIL layer A unit %0d: %0d expected %0d", o, $signed(ya[o]), e.a[o]);
        end
      end
      for (int o = 0; o < OB; o++) begin
        checks++;
        if (int'($signed(yb[o])) != e.b[o]) begin
          failures++;
          if (failures < 10) $display("FAIL layer B unit %0d: %0d expected %0d", o, $signed(yb[o]), e.b[o]);
        end
      end
      checks += 2;
      if (sa != e.sat_a) begin failures++; $display("FAIL sat A %0d expected %0d", sa, e.sat_a); end
      if (sb != e.sat_b) begin failures++; $display("FAIL sat B %0d expected %0d", sb, e.sat_b); end
    end
  end

  // Random input value whose magnitude is bounded by 2^range_bits LSBs.
  function automatic int rnd(input int range_bits);
    int v;
    v = int'($urandom % (1 << range_bits)) - (1 << (range_bits - 1));
    return v;
  endfunction

  task automatic send(input int range_bits, input bit sat_in);
    int   a_in[], b_in[];
    exp_t e;
    int   clips;
    a_in = new[IA];
    b_in = new[IB];
    for (int i = 0; i < IA; i++) begin a_in[i] = rnd(range_bits); xa[i] = K'(a_in[i]); end
    for (int i = 0; i < IB; i++) begin b_in[i] = rnd(range_bits); xb[i] = K'(b_in[i]); end
    clips = 0;
    e.sat_a = rx_ref_pkg::dense(SEED, 1, IA, OA, 1, 1, KI, KF, a_in, e.a, clips) | sat_in;
    n_relu += clips;
    clips = 0;
    e.sat_b = rx_ref_pkg::dense(SEED, 3, IB, OB, 0, 0, KI, KF, b_in, e.b, clips);
    if (e.sat_a) n_sat++;
    exp_q.push_back(e);
    in_valid = 1;
    in_sat   = sat_in;
    @(negedge clk);
    in_valid = 0;
    in_sat   = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 600; t++) begin
      // Ranges from +-2 LSB up to the full 14-bit range.
      send(2 + (t % 13), t % 50 == 7);
      if (t % 4 == 0) @(negedge clk);
    end
    repeat (3) @(posedge clk);
    checks += 3;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    if (n_relu == 0) begin failures++; $display("FAIL ReLU never clipped"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    $display("relu_clips=%0d saturated_vectors=%0d", n_relu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
