// tb_dsfp_mac -- checks the DSFP multiplier against a reference product,
// over random operands and the corner values (zero, largest, negative).
module tb_dsfp_mac;
  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  act_t  act;
  coef_t coef;
  logic signed [PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  dsfp_mac dut (.act, .coef, .prod);

  task automatic check(logic [8:0] a, logic [14:0] c);
    longint exp;
    act  = act_t'(a);
    coef = coef_t'(c);
    #1;
    exp = ref_act_val(a) * ref_coef_val(c);
    checks++;
    if (longint'(prod) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL act=%h coef=%h prod=%0d exp=%0d", a, c, prod, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(9'h000, 15'h0000);
    check(9'h1FF, 15'h3FFF);
    check(9'h1FF, 15'h7FFF);
    check(9'h001, 15'h4001);
    check(9'h1E1, 15'h3001);
    for (int i = 0; i < 3000; i++) check(9'($urandom), 15'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
