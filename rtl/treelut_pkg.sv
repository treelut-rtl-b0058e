// treelut_pkg -- shared types and elaboration-time helpers of the TreeLUT
// gradient-boosted-decision-tree (GBDT) inference engine.
//
// A TreeLUT circuit is generated from one trained, quantized model. The model is
// handed to the RTL as parameters built from the two record types below:
//
//   key_t   one unique comparison "x[feature] <= threshold". The key generator
//           evaluates every key_t once; decision nodes refer to it by index.
//   node_t  one node of a decision tree, stored in heap order: node j has its
//           "True" child at 2j+1 and its "False" child at 2j+2, the root is
//           node 0. A tree of depth D occupies 2^(D+1)-1 entries; entries under
//           a leaf are never reached and are ignored.
//
// The field widths are fixed here so that the record types are the same for
// every model; each module checks at elaboration that its model fits them.
// The comparison sense "<=" and the True-left / False-right child order follow
// the example trees of the TreeLUT description; the heap storage format is this
// design's own choice.
//
// The functions place the adder-tree pipeline registers: p2 stages are spread
// evenly over the levels of an adder tree of depth D, stage s (1..p2) sitting
// after level ceil(s*D/(p2+1)). For D = 6 and p2 = 1 this puts the one stage
// after level 3, as in the TreeLUT description.
package treelut_pkg;

  localparam int unsigned FEAT_IDX_BITS = 16;  // up to 65536 input features
  localparam int unsigned THR_BITS      = 16;  // feature width w_feature <= 16
  localparam int unsigned KEY_IDX_BITS  = 16;  // up to 65536 unique keys
  localparam int unsigned LEAF_BITS     = 8;   // leaf width w_tree <= 8

  typedef struct packed {
    logic [FEAT_IDX_BITS-1:0] feature;    // which input feature is compared
    logic [THR_BITS-1:0]      threshold;  // key = (x[feature] <= threshold)
  } key_t;

  typedef struct packed {
    logic                    is_leaf;  // 1: leaf, 0: decision node
    logic [KEY_IDX_BITS-1:0] key;      // decision node: index of its key
    logic [LEAF_BITS-1:0]    value;    // leaf: quantized leaf value qf
  } node_t;

  // Number of heap entries of a tree of the given maximum depth.
  function automatic int unsigned nodes_per_tree(input int unsigned depth);
    return (1 << (depth + 1)) - 1;
  endfunction

  // Depth (level) of heap entry j; the root is at level 0.
  function automatic int unsigned node_level(input int unsigned j);
    int unsigned l = 0;
    int unsigned n = j + 1;
    while (n > 1) begin
      n = n >> 1;
      l++;
    end
    return l;
  endfunction

  // Number of operands left after 'level' levels of 2-input adders.
  function automatic int unsigned ops_at_level(input int unsigned n_ops,
                                               input int unsigned level);
    return (n_ops + (1 << level) - 1) >> level;
  endfunction

  // Level after which pipeline stage s (1..p2) of an adder tree of depth
  // 'depth' is placed: ceil(s*depth/(p2+1)).
  function automatic int unsigned stage_level(input int unsigned s,
                                              input int unsigned depth,
                                              input int unsigned p2);
    return (s * depth + p2) / (p2 + 1);
  endfunction

  // Number of register stages placed right after adder-tree level 'level'.
  function automatic int unsigned regs_after_level(input int unsigned level,
                                                   input int unsigned depth,
                                                   input int unsigned p2);
    int unsigned n = 0;
    for (int unsigned s = 1; s <= p2; s++)
      if (stage_level(s, depth, p2) == level) n++;
    return n;
  endfunction

  // Width of an adder-tree result: exactly enough for n_ops operands at their
  // largest value 2^w_in - 1, plus a bias below 2^w_bias when there is one.
  function automatic int unsigned sum_width(input int unsigned n_ops,
                                            input int unsigned w_in,
                                            input bit          has_bias,
                                            input int unsigned w_bias);
    longint unsigned m = longint'(n_ops) * ((longint'(1) << w_in) - 1);
    if (has_bias) m += (longint'(1) << w_bias) - 1;
    return $clog2(m + 1);
  endfunction

  // 32-bit linear congruential step, used only to build synthetic stand-in
  // models (see treelut_model_pkg) and test stimulus.
  function automatic logic [31:0] lcg_next(input logic [31:0] state);
    return state * 32'd1103515245 + 32'd12345;
  endfunction

  // ---------------------------------------------------------------------
  // Synthetic stand-in models. The trained trees of a real TreeLUT model come
  // from a training run and are not part of the hardware; these functions
  // build models of any requested shape so that the RTL can be elaborated and
  // simulated at the sizes of real workloads.
  // ---------------------------------------------------------------------

  localparam int unsigned TREE_BUF = 255;      // heap entries of a depth-7 tree
  typedef node_t [0:TREE_BUF-1] tree_buf_t;

  // Key i compares feature (i mod n_features) with a threshold that differs
  // for every round r = i / n_features, so that no two keys are equal as long
  // as n_keys <= n_features * (2^w_feature - 1).
  function automatic key_t synth_key(input int unsigned i,
                                     input int unsigned n_features,
                                     input int unsigned w_feature);
    key_t        k;
    int unsigned f     = i % n_features;
    int unsigned r     = i / n_features;
    int unsigned range = (1 << w_feature) - 1;  // usable thresholds 0..range-1
    k.feature   = FEAT_IDX_BITS'(f);
    k.threshold = THR_BITS'((r * 2 + f * 3) % range);
    return k;
  endfunction

  // Tree t of a synthetic model: decision nodes pick random keys, about one
  // node in eight below level 2 ends early as a leaf, every path ends by level
  // 'depth'. Leaf values are drawn below a per-tree maximum (full w_tree range,
  // half or a quarter of it) and shifted so that the smallest reachable leaf is
  // 0, which is the property the TreeLUT leaf quantization guarantees.
  function automatic tree_buf_t synth_tree(input logic [31:0]  seed,
                                           input int unsigned  t,
                                           input int unsigned  depth,
                                           input int unsigned  n_keys,
                                           input int unsigned  w_tree);
    tree_buf_t   r;
    logic [0:TREE_BUF-1] reach;
    logic [31:0] s    = seed ^ (32'(t) * 32'h9E37_79B9);
    int unsigned nn   = nodes_per_tree(depth);
    int unsigned vmax = (1 << w_tree) - 1;
    int unsigned minv = 1 << LEAF_BITS;
    if (t % 3 == 1) vmax = vmax >> 1;
    if (t % 3 == 2) vmax = vmax >> 2;
    if (vmax == 0) vmax = 1;
    reach = '0;
    for (int unsigned j = 0; j < TREE_BUF; j++)
      r[j] = '{is_leaf: 1'b1, key: '0, value: '0};
    for (int unsigned j = 0; j < nn; j++) begin
      int unsigned lvl = node_level(j);
      bit          leaf;
      reach[j] = (j == 0) ? 1'b1 : (reach[(j-1)/2] && !r[(j-1)/2].is_leaf);
      s = lcg_next(s);
      leaf = (lvl >= depth) || (lvl >= 2 && s[31:29] == 3'd0);
      s = lcg_next(s);
      r[j].is_leaf = leaf;
      r[j].key     = leaf ? '0 : KEY_IDX_BITS'(s[30:8] % n_keys);
      s = lcg_next(s);
      r[j].value   = leaf ? LEAF_BITS'(s[30:8] % (vmax + 1)) : '0;
      if (!reach[j]) r[j] = '{is_leaf: 1'b1, key: '0, value: '0};
      else if (leaf && int'(r[j].value) < minv) minv = int'(r[j].value);
    end
    for (int unsigned j = 0; j < nn; j++)
      if (reach[j] && r[j].is_leaf) r[j].value = r[j].value - LEAF_BITS'(minv);
    return r;
  endfunction

endpackage
