// tb_treelut_full -- treelut_top at its default size, end to end.
//
// The default model has the shape of the MNIST "TreeLUT (I)" classifier:
// 784 features of 4 bits, 10 classes x 30 trees of depth 5, 3-bit leaves,
// pipelining [p0,p1,p2] = [0,1,1], i.e. a latency of 2 clocks. 120 random
// feature vectors are streamed through it, mostly back to back; each result
// must appear exactly 2 clocks later and its ten class scores must equal the
// sums obtained by walking the 300 trees of treelut_model_pkg from the root
// and adding the class bias.
module tb_treelut_full;
  import treelut_pkg::*;
  import treelut_model_pkg::*;

  localparam int unsigned LAT   = P0 + P1 + P2;
  localparam int unsigned W_SUM = treelut_pkg::sum_width(N_TREES, W_TREE, 1'b1, W_BIAS);
  localparam int          N_VEC = 120;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                 in_valid, out_valid, y_hat;
  logic [W_FEATURE-1:0] x [N_FEATURES];
  logic [W_SUM-1:0]     score [N_CLASSES];

  treelut_top u_dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .score(score), .y_hat(y_hat)
  );

  typedef struct {
    int     score [N_CLASSES];
    longint cycle;
  } expect_t;

  function automatic int walk(input int unsigned t);
    int unsigned j = 0, lvl = 0;
    while (!NODES[t][j].is_leaf && lvl < MAX_DEPTH) begin
      key_t k = KEYS[NODES[t][j].key];
      j   = (x[k.feature] <= W_FEATURE'(k.threshold)) ? 2 * j + 1 : 2 * j + 2;
      lvl = lvl + 1;
    end
    return int'(NODES[t][j].value);
  endfunction

  expect_t q [$];
  longint  cycle = 0;
  int      received = 0, b2b = 0;

  always_ff @(posedge clk) cycle <= cycle + 1;

  initial begin
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < N_VEC; n++) begin
      expect_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      foreach (x[i]) x[i] = W_FEATURE'($urandom);
      if (in_valid) begin
        for (int unsigned c = 0; c < N_CLASSES; c++) begin
          e.score[c] = int'($signed(QB[c]));
          for (int unsigned m = 0; m < N_TREES; m++) e.score[c] += walk(c * N_TREES + m);
        end
        e.cycle = cycle;
        q.push_back(e);
        b2b++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0 || received == 0) begin
      failures++;
      $display("%0d results still missing", q.size());
    end
    $display("vectors checked: %0d", received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      expect_t e;
      received++;
      if (q.size() == 0) begin
        failures++;
        $display("out_valid without an input");
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.cycle != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - e.cycle, LAT);
        end
        for (int unsigned c = 0; c < N_CLASSES; c++) begin
          checks++;
          if (int'(score[c]) != e.score[c]) begin
            failures++;
            $display("class %0d: score %0d expected %0d", c, score[c], e.score[c]);
          end
        end
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
