// tb_argmax: checks the hard-decision block at M = 256 against a linear
// scan. Vectors are random, random with forced ties (the lowest index must
// win), all equal, and with the maximum at the first or last index. Checks
// that the decision appears one clock after the input and that vectors can
// enter every clock.
module tb_argmax;
  import fxp_pkg::*;

  localparam int M  = 256;
  localparam int K  = 14;
  localparam int IW = $clog2(M);

  logic                clk = 0, rst_n = 0;
  logic                in_valid = 0, in_sat = 0;
  logic [M-1:0][K-1:0] in_vec = '0;
  logic                out_valid, out_sat;
  logic [IW-1:0]       out_idx;
  logic signed [K-1:0] out_max;

  int checks = 0, failures = 0;
  int n_ties = 0, n_vec = 0;

  typedef struct {
    int idx;
    int val;
    bit sat;
  } exp_t;
  exp_t exp_q[$];

  argmax #(.M(M), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Every clock with out_valid must match the oldest expected result, and
  // out_valid must follow in_valid by exactly one clock.
  logic in_valid_d = 0;
  always @(posedge clk) if (rst_n) begin
    in_valid_d <= in_valid;
    checks++;
    if (out_valid != in_valid_d) begin
      failures++;
      $display("FAIL out_valid=%0d one clock after in_valid=%0d", out_valid, in_valid_d);
    end
    if (out_valid) begin
      exp_t e;
      e = exp_q.pop_front();
      checks++;
      if (int'(out_idx) != e.idx || int'(out_max) != e.val || out_sat != e.sat) begin
        failures++;
        if (failures < 10)
          $display("FAIL idx=%0d max=%0d sat=%0d expected %0d %0d %0d",
                   out_idx, out_max, out_sat, e.idx, e.val, e.sat);
      end
    end
  end

  task automatic send(input logic [M-1:0][K-1:0] v, input bit sat);
    int   vals[];
    int   best;
    exp_t e;
    vals = new[M];
    for (int i = 0; i < M; i++) vals[i] = int'($signed(v[i]));
    best = rx_ref_pkg::argmax(vals);
    for (int i = best + 1; i < M; i++) if (vals[i] == vals[best]) begin n_ties++; break; end
    e.idx = best;
    e.val = vals[best];
    e.sat = sat;
    exp_q.push_back(e);
    in_valid = 1;
    in_sat   = sat;
    in_vec   = v;
    n_vec++;
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    logic [M-1:0][K-1:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < M; i++) v[i] = K'($urandom);
      case (t % 5)
        1: begin  // tie: the maximum at two random places
          int a, b;
          a = $urandom % M;
          b = $urandom % M;
          v[a] = 14'sd8191;
          v[b] = 14'sd8191;
        end
        2: for (int i = 0; i < M; i++) v[i] = K'($urandom % 8);  // many ties
        3: v[((t / 5) % 2 != 0) ? M - 1 : 0] = 14'sd8191;
        4: if (t % 10 == 4) v = '1;                            // all equal (-1)
        default: ;
      endcase
      send(v, t % 7 == 0);
      if (t % 3 == 0) @(negedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    checks++;
    if (n_ties == 0) begin failures++; $display("FAIL no ties exercised"); end
    $display("vectors=%0d with_ties=%0d", n_vec, n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
