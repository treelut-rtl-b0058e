// tb_treelut_keygen -- checks the key generator.
//
// u_ex uses the module defaults, the six keys of the worked example
// (x0<=2, x0<=7, x1<=4, x2<=3, x3<=8, x4<=0). Its expected keys are written out
// here independently of the parameter table; the example input
// [2,15,4,1,5] must give k = 6'b010011 (k0, k1 and k4 true). u_syn is a wider
// instance (40 features of 6 bits, 100 synthetic keys, several per feature)
// checked against the comparison recomputed from its key table.
module tb_treelut_keygen;
  import treelut_pkg::*;

  int checks = 0, failures = 0;

  logic [3:0] x_ex [5];
  logic [5:0] k_ex;
  treelut_keygen u_ex (.x(x_ex), .k(k_ex));

  localparam int unsigned SF = 40, SW = 6, SK = 100;
  function automatic key_t [0:SK-1] syn_keys();
    key_t [0:SK-1] r;
    for (int unsigned i = 0; i < SK; i++) r[i] = synth_key(i, SF, SW);
    return r;
  endfunction
  localparam key_t [0:SK-1] SKEYS = syn_keys();

  logic [SW-1:0] x_syn [SF];
  logic [SK-1:0] k_syn;
  treelut_keygen #(.N_FEATURES(SF), .W_FEATURE(SW), .N_KEYS(SK), .KEYS(SKEYS))
    u_syn (.x(x_syn), .k(k_syn));

  function automatic logic [5:0] ex_expect(input logic [3:0] v [5]);
    logic [5:0] e;
    e[0] = v[0] <= 2;
    e[1] = v[0] <= 7;
    e[2] = v[1] <= 4;
    e[3] = v[2] <= 3;
    e[4] = v[3] <= 8;
    e[5] = v[4] <= 0;
    return e;
  endfunction

  initial begin
    x_ex = '{4'd2, 4'd15, 4'd4, 4'd1, 4'd5};
    #1;
    checks++;
    if (k_ex !== 6'b010011) begin
      failures++;
      $display("example input: k = %b, expected 010011", k_ex);
    end
    for (int n = 0; n < 3000; n++) begin
      foreach (x_ex[i]) x_ex[i] = 4'($urandom);
      foreach (x_syn[i]) x_syn[i] = SW'($urandom);
      #1;
      checks++;
      if (k_ex !== ex_expect(x_ex)) begin
        failures++;
        if (failures < 10) $display("example keys %b, expected %b", k_ex, ex_expect(x_ex));
      end
      for (int unsigned i = 0; i < SK; i++) begin
        checks++;
        if (k_syn[i] !== (x_syn[SKEYS[i].feature] <= SW'(SKEYS[i].threshold))) begin
          failures++;
          if (failures < 10) $display("synthetic key %0d wrong", i);
        end
      end
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
