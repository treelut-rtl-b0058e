// tb_treelut_engine -- test of treelut_engine, i.e. TreeLUT with the key
// generator bypassed: the key vector is the input.
//
//   h_ex   the worked-example binary model with [p0,p1,p2] = [0,1,1]; its first
//          input is the key vector of the example features [2,15,4,1,5]
//          (k5..k0 = 010011), which must give sum 3 and class 0;
//   h_jsc  a synthetic model of the JSC "TreeLUT (I)" shape, 5 classes x 13
//          trees of depth 5, 4-bit leaves, 600 keys, [0,1,1];
//   h_bin  a synthetic binary model, 9 trees of depth 3, [1,0,2].
// Key vectors are random, so they also contain combinations that no feature
// vector could produce (e.g. "x <= 2" true but "x <= 7" false). The engine
// must still follow the keys, and the reference walks the trees on the same
// keys. Every result and its latency of p0+p1+p2 clocks are checked, and the
// test fails if back-to-back inputs, idle cycles, early leaves or either binary
// class never occurred.
module tb_treelut_engine;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam int NH = 3;
  logic done [NH];
  int   c [NH], f [NH], b2b [NH], idle [NH], early [NH], cl0 [NH], cl1 [NH];

  treelut_harness #(
    .USE_EXAMPLE(1'b1), .BYPASS(1'b1), .N_CLASSES(1), .N_TREES(2), .MAX_DEPTH(2),
    .N_FEATURES(5), .W_FEATURE(4), .W_TREE(3), .W_BIAS(4), .N_KEYS(6),
    .P0(0), .P1(1), .P2(1), .N_VEC(300)
  ) h_ex (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]),
          .n_back_to_back(b2b[0]), .n_idle(idle[0]), .n_early_leaf(early[0]),
          .n_class0(cl0[0]), .n_class1(cl1[0]));

  treelut_harness #(
    .BYPASS(1'b1), .N_CLASSES(5), .N_TREES(13), .MAX_DEPTH(5), .N_FEATURES(16),
    .W_FEATURE(8), .W_TREE(4), .W_BIAS(8), .N_KEYS(600), .P0(0), .P1(1), .P2(1),
    .SEED(32'h15C0_0E01), .N_VEC(300)
  ) h_jsc (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]),
           .n_back_to_back(b2b[1]), .n_idle(idle[1]), .n_early_leaf(early[1]),
           .n_class0(cl0[1]), .n_class1(cl1[1]));

  treelut_harness #(
    .BYPASS(1'b1), .N_CLASSES(1), .N_TREES(9), .MAX_DEPTH(3), .N_FEATURES(30),
    .W_FEATURE(1), .W_TREE(5), .W_BIAS(8), .N_KEYS(30), .P0(1), .P1(0), .P2(2),
    .BIN_QB(-110), .SEED(32'h0B1A_5E09), .N_VEC(300)
  ) h_bin (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]),
           .n_back_to_back(b2b[2]), .n_idle(idle[2]), .n_early_leaf(early[2]),
           .n_class0(cl0[2]), .n_class1(cl1[2]));

  // The example key vector must give the published result: sum 3, class 0.
  int ex_checked = 0;
  always @(posedge clk) begin
    if (rst_n && h_ex.out_valid && ex_checked == 0) begin
      ex_checked = 1;
      checks++;
      if (h_ex.score[0] != 3 || h_ex.y_hat != 1'b0) begin
        failures++;
        $display("example keys: sum %0d class %0d, expected 3 and 0",
                 h_ex.score[0], h_ex.y_hat);
      end
    end
  end

  task automatic need(input string what, input int count);
    checks++;
    $display("mechanism %-34s : %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("mechanism %s never happened", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2]);
    for (int i = 0; i < NH; i++) begin
      checks += c[i];
      failures += f[i];
    end
    need("example key vector checked", ex_checked);
    need("back-to-back inputs (II=1)", b2b[0] + b2b[1] + b2b[2]);
    need("idle input cycles", idle[0] + idle[1] + idle[2]);
    need("paths ending above max depth", early[1]);
    need("binary decision class 0", cl0[0] + cl0[2]);
    need("binary decision class 1", cl1[0] + cl1[2]);
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
