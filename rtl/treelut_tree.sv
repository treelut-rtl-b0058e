// treelut_tree -- TreeLUT layer 2, one quantized decision tree.
//
// The tree is not built as a chain of comparisons but as a leaf-value selector:
//   * path[j] is the AND of the key literals on the way from the root to node j
//     (key k on the "True" branch, ~k on the "False" branch);
//   * for every distinct leaf value v the select line sel[v] is the OR of
//     path[j] over all leaves j holding v, i.e. one boolean function per value;
//   * a cascade of 2:1 multiplexers starts from the largest leaf value and lets
//     each smaller value replace it when its select line is 1. The last
//     multiplexer, next to the output, belongs to the smallest value (0).
// Exactly one leaf is reached, so at most one select line is 1. The circuit is
// purely combinational and has no registers inside, which leaves the synthesis
// tool free to map the whole tree into LUTs.
//
// Interface: k is the key vector from the key generator, qf the W_TREE-bit leaf
// value. The tree itself is the TREE parameter, a heap-ordered node array (see
// treelut_pkg). Bits of qf above the tree's largest leaf are constant zero, so
// a tree whose leaves use only half or a quarter of the W_TREE range costs one
// or two fewer output bits after synthesis.
// Timing: combinational; p1 registers after this layer sit in treelut_top.
//
// Follows the paper's decision-tree architecture; the value order of the
// multiplexer cascade (largest value as the default input) is read from its
// figure of a 4-leaf tree, which is also the default TREE here: root k5, then
// k12 / k24, leaves 0, 1, 1, 3. The heap-ordered parameter format is this
// design's own.
module treelut_tree
  import treelut_pkg::*;
#(
  parameter int unsigned MAX_DEPTH = 2,
  parameter int unsigned N_KEYS    = 25,
  parameter int unsigned W_TREE    = 3,
  parameter node_t [0:nodes_per_tree(MAX_DEPTH)-1] TREE = '{
    '{is_leaf: 1'b0, key: 16'd5,  value: 8'd0},
    '{is_leaf: 1'b0, key: 16'd12, value: 8'd0},
    '{is_leaf: 1'b0, key: 16'd24, value: 8'd0},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd0},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd1},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd1},
    '{is_leaf: 1'b1, key: 16'd0,  value: 8'd3}}
) (
  input  logic [N_KEYS-1:0] k,
  output logic [W_TREE-1:0] qf
);

  localparam int unsigned NN = nodes_per_tree(MAX_DEPTH);
  localparam int unsigned NV = 1 << W_TREE;

  // Entries reached from the root (entries below a leaf are not).
  function automatic logic [NN-1:0] reachable();
    logic [NN-1:0] r = '0;
    r[0] = 1'b1;
    for (int unsigned j = 1; j < NN; j++)
      r[j] = r[(j-1)/2] && !TREE[(j-1)/2].is_leaf;
    return r;
  endfunction

  // Leaves, i.e. reached entries that end a path; the last level always does.
  function automatic logic [NN-1:0] leaves();
    logic [NN-1:0] r = reachable();
    logic [NN-1:0] l = '0;
    for (int unsigned j = 0; j < NN; j++)
      l[j] = r[j] && (TREE[j].is_leaf || node_level(j) == MAX_DEPTH);
    return l;
  endfunction

  localparam logic [NN-1:0] REACH = reachable();
  localparam logic [NN-1:0] LEAF  = leaves();

  // Leaves holding value v.
  function automatic logic [NN-1:0] value_mask(input int unsigned v);
    logic [NN-1:0] m = '0;
    for (int unsigned j = 0; j < NN; j++)
      m[j] = LEAF[j] && (int'(TREE[j].value) == v);
    return m;
  endfunction

  function automatic int unsigned largest_value();
    int unsigned mx = 0;
    for (int unsigned j = 0; j < NN; j++)
      if (LEAF[j] && int'(TREE[j].value) > mx) mx = int'(TREE[j].value);
    return mx;
  endfunction

  localparam int unsigned VMAX = largest_value();

  if (MAX_DEPTH > 7) begin : g_bad_depth
    $error("treelut_tree: MAX_DEPTH %0d exceeds 7", MAX_DEPTH);
  end
  if (W_TREE > LEAF_BITS) begin : g_bad_width
    $error("treelut_tree: W_TREE %0d exceeds LEAF_BITS", W_TREE);
  end
  if (VMAX >= NV) begin : g_bad_value
    $error("treelut_tree: leaf value %0d does not fit W_TREE bits", VMAX);
  end

  // Path conditions, one AND chain per reached entry.
  logic [NN-1:0] path;
  assign path[0] = 1'b1;
  for (genvar j = 1; j < NN; j++) begin : g_path
    localparam int unsigned P = (j - 1) / 2;
    if (REACH[j]) begin : g_reached
      if (int'(TREE[P].key) >= N_KEYS) begin : g_bad_key
        $error("treelut_tree: node %0d uses key %0d of %0d", P, TREE[P].key, N_KEYS);
      end
      localparam int unsigned KI = int'(TREE[P].key);
      if (j % 2 == 1) begin : g_true
        assign path[j] = path[P] & k[KI];
      end else begin : g_false
        assign path[j] = path[P] & ~k[KI];
      end
    end else begin : g_unreached
      assign path[j] = 1'b0;
    end
  end

  // One select line per distinct leaf value below the largest one.
  logic [NV-1:0] sel;
  for (genvar v = 0; v < NV; v++) begin : g_sel
    localparam logic [NN-1:0] M = value_mask(v);
    if (v < VMAX && M != '0) begin : g_used
      assign sel[v] = |(path & M);
    end else begin : g_unused
      assign sel[v] = 1'b0;
    end
  end

  // Multiplexer cascade: the largest value is the default input, each smaller
  // value present in the tree overrides it in turn.
  always_comb begin
    qf = W_TREE'(VMAX);
    for (int v = int'(VMAX) - 1; v >= 0; v--)
      if (sel[v]) qf = W_TREE'(v);
  end

endmodule
