// tb_conv3x3_pe -- checks one pixel location: random 3x3 neighbourhoods and
// kernels are accumulated over several cycles, restarted with clr, and the
// accumulator is compared with a reference sum after every cycle. Also
// checks that the accumulator holds while en is low.
module tb_conv3x3_pe;
  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  act_t [TAPS-1:0] win;
  kernel_t kern;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  longint model;

  conv3x3_pe dut (.clk, .rst_n, .en, .clr, .win, .kern, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win = '0; kern = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = 0;
    for (int it = 0; it < 1500; it++) begin
      longint s;
      @(negedge clk);
      en  = ($urandom_range(7, 0) != 0);
      clr = ($urandom_range(5, 0) == 0);
      s = 0;
      for (int t = 0; t < TAPS; t++) begin
        logic [8:0]  a;
        logic [14:0] c;
        a = (it % 50 == 7) ? 9'h1FF : 9'($urandom);
        c = (it % 50 == 7) ? 15'h3FFF : 15'($urandom);
        win[t]  = act_t'(a);
        kern[t] = coef_t'(c);
        s += ref_act_val(a) * ref_coef_val(c);
      end
      if (en) model = clr ? s : model + s;
      @(posedge clk);
      #1;
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d acc=%0d exp=%0d", it, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
