// tb_cnn_engine -- one engine (M = 4) run by hand: the host port loads
// three input channels and three kernels, then, in controller mode, the
// testbench plays the controller and a one-engine ring (it feeds the
// engine's own image read data back as its window), accumulates the three
// channels, writes back, and reads the result pixels through the host port.
// Compared with a reference convolution; also checks that host writes are
// ignored while the controller owns the buffers.
module tb_cnn_engine;
  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  localparam int M = 4, R = M + 2, N = R * R;
  logic clk = 0, rst_n = 0, ctl_busy = 0;
  logic h_img_en = 0, h_img_we = 0, h_coef_en = 0, h_coef_we = 0;
  logic [IADDR_W-1:0] h_img_addr = '0, c_img_addr = '0;
  logic [7:0] h_img_lane = '0;
  act_t h_img_pix = '0;
  logic [CADDR_W-1:0] h_coef_addr = '0, c_coef_addr = '0;
  logic [3:0] h_coef_lane = '0;
  coef_t h_coef_val = '0;
  logic c_img_en = 0, c_img_we = 0, c_coef_en = 0, mac_en = 0, acc_clr = 0, pool = 0;
  logic [5:0] out_shift = 6'd4;
  logic [4:0] vsize = 5'(M);
  act_t [N-1:0] win, img_rdata;
  kernel_t coef_rdata;
  int checks = 0, failures = 0;

  logic [8:0]  img [3][N];
  logic [14:0] ker [3][TAPS];

  cnn_engine #(.M(M), .IMG_WORDS(8), .COEF_WORDS(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      // host load
      for (int ch = 0; ch < 3; ch++) begin
        for (int i = 0; i < N; i++) begin
          int r, c;
          r = i / R; c = i % R;
          img[ch][i] = (r == 0 || c == 0 || r == R-1 || c == R-1) ? 9'd0 : rand_act(3);
          @(negedge clk);
          h_img_en = 1; h_img_we = 1; h_img_addr = IADDR_W'(ch); h_img_lane = 8'(i);
          h_img_pix = act_t'(img[ch][i]);
        end
        for (int t = 0; t < TAPS; t++) begin
          ker[ch][t] = rand_coef(4095);
          @(negedge clk);
          h_img_en = 0;
          h_coef_en = 1; h_coef_we = 1; h_coef_addr = CADDR_W'(ch); h_coef_lane = 4'(t);
          h_coef_val = coef_t'(ker[ch][t]);
        end
        @(negedge clk);
        h_coef_en = 0;
      end
      // controller mode
      @(negedge clk);
      h_img_en = 0; h_coef_en = 0; ctl_busy = 1;
      pool = 1'(rep % 2);
      for (int ch = 0; ch < 3; ch++) begin
        c_img_en = 1; c_img_addr = IADDR_W'(ch); c_coef_en = 1; c_coef_addr = CADDR_W'(ch);
        // a host write attempt during busy must have no effect
        h_img_en = 1; h_img_we = 1; h_img_addr = IADDR_W'(ch); h_img_lane = 8'(R + 1); h_img_pix = act_t'(9'h1FF);
        @(negedge clk);
        c_img_en = 0; c_coef_en = 0; h_img_en = 0; h_img_we = 0;
        win = img_rdata;
        mac_en = 1; acc_clr = (ch == 0);
        @(negedge clk);
        mac_en = 0; acc_clr = 0;
      end
      c_img_en = 1; c_img_we = 1; c_img_addr = IADDR_W'(5);
      @(negedge clk);
      c_img_en = 0; c_img_we = 0; ctl_busy = 0;
      // reference and read back
      begin
        longint sum [M][M];
        logic [8:0] exp [N];
        for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) begin
          sum[r][c] = 0;
          for (int ch = 0; ch < 3; ch++)
            for (int t = 0; t < TAPS; t++)
              sum[r][c] += ref_act_val(img[ch][(r + t/3)*R + c + t%3]) * ref_coef_val(ker[ch][t]);
        end
        for (int i = 0; i < N; i++) exp[i] = 0;
        if (pool) begin
          for (int i = 0; i < M/2; i++) for (int j = 0; j < M/2; j++) begin
            longint mx;
            mx = sum[2*i][2*j];
            for (int d = 1; d < 4; d++) if (sum[2*i + d/2][2*j + d%2] > mx) mx = sum[2*i + d/2][2*j + d%2];
            exp[(i+1)*R + j+1] = ref_to_act(mx, 4);
          end
        end else begin
          for (int r = 0; r < M; r++) for (int c = 0; c < M; c++)
            exp[(r+1)*R + c+1] = ref_to_act(sum[r][c], 4);
        end
        h_img_en = 1; h_img_we = 0; h_img_addr = IADDR_W'(5);
        @(negedge clk);
        h_img_en = 0;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (img_rdata[i] != exp[i]) begin
            failures++;
            if (failures < 10) $display("FAIL rep=%0d pix %0d got %h exp %h", rep, i, img_rdata[i], exp[i]);
          end
        end
        // input channel 0 must be unchanged by the write attempted while busy
        h_img_en = 1; h_img_addr = IADDR_W'(0);
        @(negedge clk);
        h_img_en = 0;
        checks++;
        if (img_rdata[R + 1] != img[0][R + 1]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
