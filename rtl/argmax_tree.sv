// argmax_tree: the MAXIMUM block of the reduced softmax layer.
//
// Given K signed scores x[0..K-1], it returns the index of the largest one (the
// predicted class) and that largest score. It is purely combinational: a balanced
// binary tree of compare-select nodes, ceil(log2 K) levels deep. The K inputs are
// padded to the next power of two with empty candidates that never win. Each node
// keeps its left (lower-index) candidate unless the right one is valid and strictly
// greater, so when scores tie, the lowest index wins.
//
// Interface: x is an unpacked array of K scores, W bits each, signed two's
// complement. idx is the 0-based class index (x[0] is class 1 in one-based
// numbering), max_val the winning score. Both settle combinationally from x.
//
// From the method: the output is the argmax of the inputs, with no exponential or
// division. This design's choices: the tree structure, the signed integer format and
// the lowest-index rule for ties, on which the method says nothing.
module argmax_tree
  import rs_pkg::*;
#(
  parameter int unsigned K  = K_DEFAULT,
  parameter int unsigned W  = W_DEFAULT,
  localparam int unsigned IW = idx_width(K)
) (
  input  logic signed [W-1:0] x [K],
  output logic        [IW-1:0] idx,
  output logic signed [W-1:0] max_val
);

  // Tree depth and padded leaf count.
  localparam int unsigned L = (K > 1) ? $clog2(K) : 0;
  localparam int unsigned N = 1 << L;

  typedef struct packed {
    logic                vld;
    logic signed [W-1:0] val;
    logic [IW-1:0]       idx;
  } cand_t;

  // Level l holds the N >> l candidates left after l rounds; level 0 are the leaves.
  // Each level is a signal of its own, so no tool sees the tree as a loop.
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    cand_t c [N >> l];
    if (l == 0) begin : g_leaves
      for (genvar i = 0; i < N; i++) begin : g_leaf
        if (i < K) begin : g_real
          assign c[i] = '{vld: 1'b1, val: x[i], idx: IW'(i)};
        end else begin : g_pad
          assign c[i] = '{vld: 1'b0, val: '0, idx: '0};
        end
      end
    end else begin : g_nodes
      for (genvar j = 0; j < (N >> l); j++) begin : g_node
        cand_t a, b;
        assign a = g_lvl[l-1].c[2*j];
        assign b = g_lvl[l-1].c[2*j+1];
        // b holds the higher indices, so it wins only when strictly greater.
        assign c[j] = (b.vld && (!a.vld || (b.val > a.val))) ? b : a;
      end
    end
  end

  assign idx     = g_lvl[L].c[0].idx;
  assign max_val = g_lvl[L].c[0].val;

endmodule
