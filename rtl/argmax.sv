// argmax: hard decision on the output layer of the receiver.
//
// Returns the index of the largest of M signed K-bit pre-activations. The
// softmax of the output layer is monotonic, so its largest output sits at the
// same index and need not be computed. Ties go to the lowest index.
// The decision rule is the paper's; the comparator tree is this design's.
//
// How it works: a balanced tree of two-input compare-select nodes, log2(M)
// levels deep. The leaves are the inputs in index order, padded to a power of
// two with the most negative value. Each node keeps the larger of its two
// children, and the left one, which has the lower index, on a tie.
//
// Interface: in_vec/in_valid/in_sat in; out_idx (the decision), out_max (the
// winning pre-activation), out_valid and out_sat (passed along) out.
// Timing: one register stage; a new vector may enter every clock.
module argmax
  import fxp_pkg::*;
#(
  parameter int unsigned M  = 256,
  parameter int unsigned K  = KI_DEF + KF_DEF + 1,
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_sat,
  input  logic [M-1:0][K-1:0]   in_vec,
  output logic                  out_valid,
  output logic                  out_sat,
  output logic [IW-1:0]         out_idx,
  output logic signed [K-1:0]   out_max
);

  localparam int unsigned P = 2 ** IW;  // leaves, padded to a power of two

  typedef struct packed {
    logic signed [K-1:0] val;
    logic [IW-1:0]       idx;
  } cand_t;

  cand_t leaf [P];
  cand_t best;

  for (genvar l = 0; l < P; l++) begin : g_leaf
    if (l < M) begin : g_in
      assign leaf[l] = '{val: $signed(in_vec[l]), idx: IW'(l)};
    end else begin : g_pad
      assign leaf[l] = '{val: {1'b1, {(K-1){1'b0}}}, idx: IW'(l)};
    end
  end

  // Level lv holds P / 2^(lv+1) nodes; node j compares nodes 2j and 2j+1 of
  // the level below and keeps the larger, the lower-indexed one on a tie.
  for (genvar lv = 0; lv < IW; lv++) begin : g_lvl
    localparam int unsigned W = P >> (lv + 1);
    cand_t c [W];
    for (genvar j = 0; j < W; j++) begin : g_node
      cand_t a, b;
      if (lv == 0) begin : g_first
        assign a = leaf[2*j];
        assign b = leaf[2*j + 1];
      end else begin : g_next
        assign a = g_lvl[lv-1].c[2*j];
        assign b = g_lvl[lv-1].c[2*j + 1];
      end
      assign c[j] = (b.val > a.val) ? b : a;
    end
  end

  assign best = g_lvl[IW-1].c[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sat   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sat   <= in_valid && in_sat;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_idx <= best.idx;
      out_max <= best.val;
    end
  end

endmodule
