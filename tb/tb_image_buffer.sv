// tb_image_buffer -- writes single pixels and whole masked words into a
// small imagery buffer (M = 2, 8 words) and checks every read against a
// shadow copy, including that unmasked pixels keep their value and that
// rdata holds between reads.
module tb_image_buffer;
  import cnn_dsa_pkg::*;

  localparam int M = 2, W = 8, N = (M + 2) * (M + 2);
  logic clk = 0, en = 0, we = 0;
  logic [IADDR_W-1:0] addr = '0;
  logic [N-1:0] wmask = '0;
  act_t [N-1:0] wdata = '0, rdata;
  act_t [N-1:0] shadow [W];
  int checks = 0, failures = 0;

  image_buffer #(.M(M), .WORDS(W)) dut (.clk, .en, .we, .addr, .wmask, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a);
    @(negedge clk);
    en = 1; we = 0; addr = IADDR_W'(a);
    @(negedge clk);
    en = 0;
    checks++;
    if (rdata != shadow[a]) begin
      failures++;
      if (failures < 10) $display("FAIL read word %0d", a);
    end
  endtask

  initial begin
    for (int a = 0; a < W; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = IADDR_W'(a); wmask = '1;
      for (int i = 0; i < N; i++) wdata[i] = act_t'(9'($urandom));
      shadow[a] = wdata;
    end
    for (int it = 0; it < 800; it++) begin
      int a;
      a = $urandom_range(W - 1, 0);
      if ($urandom_range(1, 0) == 1) begin
        @(negedge clk);
        en = 1; we = 1; addr = IADDR_W'(a);
        wmask = ($urandom_range(3, 0) == 0) ? N'($urandom) : (N'(1) << $urandom_range(N - 1, 0));
        for (int i = 0; i < N; i++) wdata[i] = act_t'(9'($urandom));
        for (int i = 0; i < N; i++) if (wmask[i]) shadow[a][i] = wdata[i];
      end else begin
        rd(a);
        // idle cycle: data must hold
        @(negedge clk);
        checks++;
        if (rdata != shadow[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
