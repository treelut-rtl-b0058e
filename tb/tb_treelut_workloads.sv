// tb_treelut_workloads -- treelut_top at the shapes of the other classifiers
// of the TreeLUT evaluation (the MNIST (I) shape is the default and is covered
// by tb_treelut_full).
//
//   MNIST(II): 784 features x 4 bits, 10 classes x 30 trees, depth 4, 3-bit leaves, [0,1,1]
//   JSC  (I) : 16 features x 8 bits, 5 classes x 13 trees, depth 5, 4-bit leaves, [0,1,1]
//   JSC  (II): 16 features x 8 bits, 5 classes x 10 trees, depth 5, 2-bit leaves, [0,1,0]
//   NID  (I) : 593 features x 1 bit, binary, 40 trees, depth 3, 5-bit leaves,   [0,0,1]
//   NID  (II): 593 features x 1 bit, binary, 10 trees, depth 3, 5-bit leaves,   [0,0,1]
// The trained trees are not available, so each instance carries a synthetic
// model of that shape; the numbers of unique keys and the biases are
// assumptions. Each instance streams random vectors and checks every score,
// decision and latency against a tree-walking reference (treelut_harness).
module tb_treelut_workloads;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam int NH = 5;
  logic done [NH];
  int   c [NH], f [NH], b2b [NH], idle [NH], early [NH], cl0 [NH], cl1 [NH];

  treelut_harness #(
    .N_CLASSES(5), .N_TREES(13), .MAX_DEPTH(5), .N_FEATURES(16), .W_FEATURE(8),
    .W_TREE(4), .W_BIAS(8), .N_KEYS(600), .P0(0), .P1(1), .P2(1),
    .SEED(32'h15C0_0001), .N_VEC(150)
  ) h_jsc1 (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]),
            .n_back_to_back(b2b[0]), .n_idle(idle[0]), .n_early_leaf(early[0]),
            .n_class0(cl0[0]), .n_class1(cl1[0]));

  treelut_harness #(
    .N_CLASSES(5), .N_TREES(10), .MAX_DEPTH(5), .N_FEATURES(16), .W_FEATURE(8),
    .W_TREE(2), .W_BIAS(6), .N_KEYS(400), .P0(0), .P1(1), .P2(0),
    .SEED(32'h15C0_0002), .N_VEC(150)
  ) h_jsc2 (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]),
            .n_back_to_back(b2b[1]), .n_idle(idle[1]), .n_early_leaf(early[1]),
            .n_class0(cl0[1]), .n_class1(cl1[1]));

  treelut_harness #(
    .N_CLASSES(1), .N_TREES(40), .MAX_DEPTH(3), .N_FEATURES(593), .W_FEATURE(1),
    .W_TREE(5), .W_BIAS(10), .N_KEYS(280), .P0(0), .P1(0), .P2(1), .BIN_QB(-350),
    .SEED(32'h0A1D_0001), .N_VEC(150)
  ) h_nid1 (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]),
            .n_back_to_back(b2b[2]), .n_idle(idle[2]), .n_early_leaf(early[2]),
            .n_class0(cl0[2]), .n_class1(cl1[2]));

  treelut_harness #(
    .N_CLASSES(1), .N_TREES(10), .MAX_DEPTH(3), .N_FEATURES(593), .W_FEATURE(1),
    .W_TREE(5), .W_BIAS(8), .N_KEYS(70), .P0(0), .P1(0), .P2(1), .BIN_QB(-88),
    .SEED(32'h0A1D_0002), .N_VEC(150)
  ) h_nid2 (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]),
            .n_back_to_back(b2b[3]), .n_idle(idle[3]), .n_early_leaf(early[3]),
            .n_class0(cl0[3]), .n_class1(cl1[3]));

  treelut_harness #(
    .N_CLASSES(10), .N_TREES(30), .MAX_DEPTH(4), .N_FEATURES(784), .W_FEATURE(4),
    .W_TREE(3), .W_BIAS(8), .N_KEYS(2048), .P0(0), .P1(1), .P2(1),
    .SEED(32'h3E15_0002), .N_VEC(60)
  ) h_mnist2 (.clk, .rst_n, .done(done[4]), .checks(c[4]), .failures(f[4]),
              .n_back_to_back(b2b[4]), .n_idle(idle[4]), .n_early_leaf(early[4]),
              .n_class0(cl0[4]), .n_class1(cl1[4]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    for (int i = 0; i < NH; i++) begin
      checks += c[i];
      failures += f[i];
      $display("workload %0d: %0d checks, %0d failures", i, c[i], f[i]);
    end
    checks++;
    if (cl0[2] + cl0[3] == 0 || cl1[2] + cl1[3] == 0) begin
      failures++;
      $display("binary workloads never produced both classes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
