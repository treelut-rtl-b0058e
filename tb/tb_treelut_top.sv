// tb_treelut_top -- end-to-end test of treelut_top in four configurations.
//
//   h_ex   the worked-example binary model (2 trees, 6 keys, qb = -5) with
//          pipelining [p0,p1,p2] = [1,1,1]; its first input is the example
//          vector [2,15,4,1,5], which must give sum 3 and class 0;
//   h_mc   a synthetic 3-class model, 5 trees of depth 3 per class, [0,1,2];
//   h_bin  a synthetic binary model, 7 trees of depth 4, no pipelining at all
//          (fully combinational, latency 0);
//   h_p0   a synthetic 2-class model with [2,0,3] (stacked key registers and
//          more adder stages than adder levels).
// Every result is checked against a tree-walking reference model, including
// its latency of p0+p1+p2 clocks. The test also counts how often each
// mechanism occurred and fails if one never did: back-to-back inputs (II = 1),
// idle cycles, paths that end above the maximum depth, both binary decisions,
// multiclass scoring with biases, and each of the p0 / p1 / p2 register places.
module tb_treelut_top;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam int NH = 4;
  logic done [NH];
  int   c [NH], f [NH], b2b [NH], idle [NH], early [NH], cl0 [NH], cl1 [NH];

  treelut_harness #(
    .USE_EXAMPLE(1'b1), .N_CLASSES(1), .N_TREES(2), .MAX_DEPTH(2), .N_FEATURES(5),
    .W_FEATURE(4), .W_TREE(3), .W_BIAS(4), .N_KEYS(6), .P0(1), .P1(1), .P2(1),
    .N_VEC(300)
  ) h_ex (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]),
          .n_back_to_back(b2b[0]), .n_idle(idle[0]), .n_early_leaf(early[0]),
          .n_class0(cl0[0]), .n_class1(cl1[0]));

  treelut_harness #(
    .N_CLASSES(3), .N_TREES(5), .MAX_DEPTH(3), .N_FEATURES(12), .W_FEATURE(4),
    .W_TREE(3), .W_BIAS(6), .N_KEYS(30), .P0(0), .P1(1), .P2(2),
    .SEED(32'hC0FF_EE01), .N_VEC(300)
  ) h_mc (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]),
          .n_back_to_back(b2b[1]), .n_idle(idle[1]), .n_early_leaf(early[1]),
          .n_class0(cl0[1]), .n_class1(cl1[1]));

  treelut_harness #(
    .N_CLASSES(1), .N_TREES(7), .MAX_DEPTH(4), .N_FEATURES(20), .W_FEATURE(3),
    .W_TREE(4), .W_BIAS(4), .N_KEYS(40), .P0(0), .P1(0), .P2(0), .BIN_QB(-28),
    .SEED(32'h0BAD_5EED), .N_VEC(300)
  ) h_bin (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]),
           .n_back_to_back(b2b[2]), .n_idle(idle[2]), .n_early_leaf(early[2]),
           .n_class0(cl0[2]), .n_class1(cl1[2]));

  treelut_harness #(
    .N_CLASSES(2), .N_TREES(4), .MAX_DEPTH(3), .N_FEATURES(9), .W_FEATURE(5),
    .W_TREE(2), .W_BIAS(5), .N_KEYS(25), .P0(2), .P1(0), .P2(3),
    .SEED(32'h2222_0003), .N_VEC(200)
  ) h_p0 (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]),
          .n_back_to_back(b2b[3]), .n_idle(idle[3]), .n_early_leaf(early[3]),
          .n_class0(cl0[3]), .n_class1(cl1[3]));

  // The example vector must give the published result: sum 3, class 0.
  int ex_checked = 0;
  always @(posedge clk) begin
    if (rst_n && h_ex.out_valid && ex_checked == 0) begin
      ex_checked = 1;
      checks++;
      if (h_ex.score[0] != 3 || h_ex.y_hat != 1'b0) begin
        failures++;
        $display("example vector: sum %0d class %0d, expected 3 and 0",
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
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < NH; i++) begin
      checks += c[i];
      failures += f[i];
    end
    need("example vector checked", ex_checked);
    need("back-to-back inputs (II=1)", b2b[0] + b2b[1] + b2b[2] + b2b[3]);
    need("idle input cycles", idle[0] + idle[1] + idle[2] + idle[3]);
    need("paths ending above max depth", early[1] + early[2] + early[3]);
    need("binary decision class 0", cl0[0] + cl0[2]);
    need("binary decision class 1", cl1[0] + cl1[2]);
    need("multiclass results with bias", c[1] > 0 && c[3] > 0);
    need("p0 key registers used", (h_ex.LAT > 0) && (h_p0.P0 > 0) && (c[0] > 0));
    need("p1 tree registers used", (h_mc.P1 > 0) && (c[1] > 0));
    need("p2 adder registers used", (h_mc.P2 > 0) && (h_p0.P2 > 0) && (c[3] > 0));
    need("unpipelined (latency 0) results", (h_bin.LAT == 0) && (c[2] > 0));
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
