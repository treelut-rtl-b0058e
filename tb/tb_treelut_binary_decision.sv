// tb_treelut_binary_decision -- checks the binary class decision.
//
// u_def (defaults: 4-bit sum, qb = -5, the worked example) is tried for every
// sum: class 1 exactly when sum >= 5. u_pos (qb = +2) must always say class 1,
// u_big (qb = -40 with a 5-bit sum, threshold above any sum) always class 0,
// and u_wide (10-bit sum, qb = -300) is checked on random sums.
module tb_treelut_binary_decision;
  int checks = 0, failures = 0;

  logic [3:0] s4;
  logic [4:0] s5;
  logic [9:0] s10;
  logic y_def, y_pos, y_big, y_wide;

  treelut_binary_decision u_def (.sum(s4), .y_hat(y_def));
  treelut_binary_decision #(.W_SUM(4), .QB(2))    u_pos  (.sum(s4),  .y_hat(y_pos));
  treelut_binary_decision #(.W_SUM(5), .QB(-40))  u_big  (.sum(s5),  .y_hat(y_big));
  treelut_binary_decision #(.W_SUM(10), .QB(-300)) u_wide (.sum(s10), .y_hat(y_wide));

  task automatic expect_bit(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      s4 = 4'(v); s5 = 5'(2 * v + 1);
      #1;
      expect_bit($sformatf("qb=-5 sum=%0d", v), y_def, v >= 5);
      expect_bit($sformatf("qb=+2 sum=%0d", v), y_pos, 1'b1);
      expect_bit($sformatf("qb=-40 sum=%0d", 2 * v + 1), y_big, 1'b0);
    end
    for (int n = 0; n < 500; n++) begin
      s10 = (n < 3) ? 10'(299 + n) : 10'($urandom);
      #1;
      expect_bit($sformatf("qb=-300 sum=%0d", s10), y_wide, s10 >= 300);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog: test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
