// treelut_harness -- self-checking test harness around one treelut_top.
//
// Builds a model of the requested shape (the worked-example model when
// USE_EXAMPLE is set, otherwise a synthetic model from treelut_pkg's
// generators and SEED), instantiates treelut_top with it and streams N_VEC
// random feature vectors through it, some back to back and some with idle
// cycles in between. For every accepted vector the expected class scores and
// binary decision are computed here by walking each tree from its root
// (comparing features with thresholds directly, without the key generator or
// the multiplexer realisation) and summing leaves and biases. Each result must
// appear exactly P0+P1+P2 clocks after its input, flagged by out_valid.
//
// With BYPASS set the harness tests treelut_engine instead, i.e. TreeLUT with
// the key generator bypassed: it then drives random key vectors directly (also
// combinations that no feature vector could produce), and the reference walks
// the trees on those keys.
//
// Besides pass/fail counts it reports how often the mechanisms of the design
// were exercised: back-to-back inputs, idle cycles, paths ending above the
// maximum depth, and (binary models) both decisions.
module treelut_harness
  import treelut_pkg::*;
#(
  parameter bit          USE_EXAMPLE = 1'b0,
  parameter bit          BYPASS      = 1'b0,
  parameter int unsigned N_CLASSES   = 3,
  parameter int unsigned N_TREES     = 5,
  parameter int unsigned MAX_DEPTH   = 3,
  parameter int unsigned N_FEATURES  = 12,
  parameter int unsigned W_FEATURE   = 4,
  parameter int unsigned W_TREE      = 3,
  parameter int unsigned W_BIAS      = 6,
  parameter int unsigned N_KEYS      = 30,
  parameter int unsigned P0          = 0,
  parameter int unsigned P1          = 1,
  parameter int unsigned P2          = 1,
  parameter int          BIN_QB      = -20,  // bias of a synthetic binary model
  parameter logic [31:0] SEED        = 32'h1234_5678,
  parameter int unsigned N_VEC       = 200
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_back_to_back,
  output int   n_idle,
  output int   n_early_leaf,
  output int   n_class0,
  output int   n_class1
);

  localparam int unsigned NN  = nodes_per_tree(MAX_DEPTH);
  localparam int unsigned NT  = N_CLASSES * N_TREES;
  localparam int unsigned LAT = P0 + P1 + P2;
  localparam int unsigned W_SUM = treelut_pkg::sum_width(N_TREES, W_TREE, N_CLASSES > 1, W_BIAS);

  typedef key_t [0:N_KEYS-1]       keys_t;
  typedef node_t [0:NT-1][0:NN-1]  nodes_t;
  typedef logic [0:N_CLASSES-1][31:0] bias_t;

  function automatic keys_t make_keys();
    keys_t r;
    for (int unsigned i = 0; i < N_KEYS; i++)
      r[i] = USE_EXAMPLE ? treelut_example_pkg::KEYS[i % treelut_example_pkg::N_KEYS]
                         : synth_key(i, N_FEATURES, W_FEATURE);
    return r;
  endfunction

  function automatic nodes_t make_nodes();
    nodes_t    r;
    tree_buf_t b;
    for (int unsigned t = 0; t < NT; t++) begin
      if (USE_EXAMPLE) begin
        for (int unsigned j = 0; j < NN; j++)
          r[t][j] = treelut_example_pkg::NODES[t % treelut_example_pkg::N_TREES][j % treelut_example_pkg::N_NODES];
      end else begin
        b    = synth_tree(SEED, t, MAX_DEPTH, N_KEYS, W_TREE);
        r[t] = b[0:NN-1];
      end
    end
    return r;
  endfunction

  function automatic bias_t make_bias();
    bias_t       r;
    logic [31:0] s = SEED ^ 32'h5A5A_0F0F;
    for (int unsigned n = 0; n < N_CLASSES; n++) begin
      s = lcg_next(s);
      if (USE_EXAMPLE)        r[n] = treelut_example_pkg::QB[0];
      else if (N_CLASSES == 1) r[n] = 32'(BIN_QB);
      else                     r[n] = 32'(s[30:16]) % (32'd1 << W_BIAS);
    end
    return r;
  endfunction

  localparam keys_t  KEYS  = make_keys();
  localparam nodes_t NODES = make_nodes();
  localparam bias_t  QB    = make_bias();

  logic                 in_valid, out_valid, y_hat;
  logic [W_FEATURE-1:0] x [N_FEATURES];
  logic [W_SUM-1:0]     score [N_CLASSES];

  logic [N_KEYS-1:0]    kv;  // key vector driven in BYPASS mode

  if (BYPASS) begin : g_engine
    treelut_engine #(
      .N_CLASSES(N_CLASSES), .N_TREES(N_TREES), .MAX_DEPTH(MAX_DEPTH),
      .W_TREE(W_TREE), .W_BIAS(W_BIAS), .N_KEYS(N_KEYS),
      .P0(P0), .P1(P1), .P2(P2), .NODES(NODES), .QB(QB)
    ) u_dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .k(kv),
      .out_valid(out_valid), .score(score), .y_hat(y_hat)
    );
  end else begin : g_top
    treelut_top #(
      .N_CLASSES(N_CLASSES), .N_TREES(N_TREES), .MAX_DEPTH(MAX_DEPTH),
      .N_FEATURES(N_FEATURES), .W_FEATURE(W_FEATURE), .W_TREE(W_TREE),
      .W_BIAS(W_BIAS), .N_KEYS(N_KEYS), .P0(P0), .P1(P1), .P2(P2),
      .KEYS(KEYS), .NODES(NODES), .QB(QB)
    ) u_dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
      .out_valid(out_valid), .score(score), .y_hat(y_hat)
    );
  end

  // ---- reference model ----------------------------------------------------
  typedef struct {
    longint score [N_CLASSES];
    bit     y;
    longint cycle;
  } expect_t;

  int early_in_vec;

  function automatic longint walk(input int unsigned t);
    int unsigned j = 0;
    int unsigned lvl = 0;
    while (!NODES[t][j].is_leaf && lvl < MAX_DEPTH) begin
      key_t k = KEYS[NODES[t][j].key];
      bit   b = BYPASS ? kv[NODES[t][j].key] : (x[k.feature] <= W_FEATURE'(k.threshold));
      j   = b ? 2 * j + 1 : 2 * j + 2;
      lvl = lvl + 1;
    end
    if (lvl < MAX_DEPTH) early_in_vec++;
    return longint'(NODES[t][j].value);
  endfunction

  function automatic expect_t reference(input longint cyc);
    expect_t e;
    for (int unsigned n = 0; n < N_CLASSES; n++) begin
      longint s = 0;
      for (int unsigned m = 0; m < N_TREES; m++) s += walk(n * N_TREES + m);
      if (N_CLASSES > 1) s += longint'($signed(QB[n]));
      e.score[n] = s;
    end
    e.y     = (N_CLASSES == 1) ? (e.score[0] + longint'($signed(QB[0])) >= 0) : 1'b0;
    e.cycle = cyc;
    return e;
  endfunction

  // ---- stimulus and checking ------------------------------------------------
  expect_t q [$];
  longint  cycle;
  int      sent, received;
  bit      prev_valid;

  always_ff @(posedge clk) cycle <= rst_n ? cycle + 1 : 0;

  initial begin
    done = 1'b0; checks = 0; failures = 0; n_back_to_back = 0; n_idle = 0;
    n_early_leaf = 0; n_class0 = 0; n_class1 = 0; sent = 0; received = 0;
    in_valid = 1'b0; prev_valid = 1'b0; cycle = 0;
    foreach (x[i]) x[i] = '0;
    kv = '0;
    @(posedge rst_n);
    while (sent < N_VEC) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0;
        foreach (x[i]) x[i] = W_FEATURE'($urandom);  // ignored by the checker
        foreach (kv[i]) kv[i] = 1'($urandom);
        n_idle++;
      end else begin
        in_valid = 1'b1;
        if (USE_EXAMPLE && sent == 0) begin
          foreach (x[i]) x[i] = W_FEATURE'(treelut_example_pkg::EXAMPLE_X[i]);
        end else begin
          foreach (x[i]) begin
            case ($urandom_range(0, 7))
              0:       x[i] = '0;
              1:       x[i] = '1;
              default: x[i] = W_FEATURE'($urandom);
            endcase
          end
        end
        foreach (kv[i]) kv[i] = 1'($urandom);
        if (USE_EXAMPLE && sent == 0)  // keys of the example vector
          kv = N_KEYS'(6'b010011);
        if (prev_valid) n_back_to_back++;
        early_in_vec = 0;
        q.push_back(reference(cycle));
        if (early_in_vec > 0) n_early_leaf++;
        sent++;
      end
      prev_valid = in_valid;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (received != sent || q.size() != 0) begin
      failures++;
      $display("harness: %0d inputs but %0d results", sent, received);
    end
    done = 1'b1;
  end

  // Compare each result in the cycle it appears: values are sampled at the
  // clock edge that ends that cycle, before the edge updates any register.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      expect_t e;
      received++;
      if (q.size() == 0) begin
        failures++;
        $display("harness: unexpected out_valid at cycle %0d", cycle);
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cycle != LAT) begin
          failures++;
          $display("harness: latency %0d, expected %0d", cycle - e.cycle, LAT);
        end
        for (int unsigned n = 0; n < N_CLASSES; n++) begin
          checks++;
          if (longint'(score[n]) != e.score[n]) begin
            failures++;
            $display("harness: class %0d score %0d, expected %0d", n, score[n], e.score[n]);
          end
        end
        if (N_CLASSES == 1) begin
          checks++;
          if (y_hat != e.y) begin
            failures++;
            $display("harness: y_hat %0d, expected %0d", y_hat, e.y);
          end
          if (e.y) n_class1++; else n_class0++;
        end
      end
    end
  end

endmodule
