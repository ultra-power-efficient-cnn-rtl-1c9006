// tb_coef_buffer -- loads a small coefficient buffer (64 words) one tap at
// a time, as the host does, and reads every word back as a whole kernel.
module tb_coef_buffer;
  import cnn_dsa_pkg::*;

  localparam int W = 64;
  logic clk = 0, en = 0, we = 0;
  logic [CADDR_W-1:0] addr = '0;
  logic [TAPS-1:0] wmask = '0;
  kernel_t wdata = '0, rdata;
  kernel_t shadow [W];
  int checks = 0, failures = 0;

  coef_buffer #(.WORDS(W)) dut (.clk, .en, .we, .addr, .wmask, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < W; a++)
        for (int t = 0; t < TAPS; t++) begin
          coef_t v;
          if (pass > 0 && $urandom_range(2, 0) != 0) continue;
          v = coef_t'(15'($urandom));
          @(negedge clk);
          en = 1; we = 1; addr = CADDR_W'(a); wmask = TAPS'(1) << t;
          wdata = {TAPS{v}};
          shadow[a][t] = v;
        end
      for (int a = 0; a < W; a++) begin
        @(negedge clk);
        en = 1; we = 0; addr = CADDR_W'(a);
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata != shadow[a]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
