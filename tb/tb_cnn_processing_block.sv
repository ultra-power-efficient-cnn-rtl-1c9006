// tb_cnn_processing_block -- checks the convolution array at M = 6: random
// regions and kernels are accumulated over 1..4 input channels, then the
// padded result region is compared pixel by pixel with a reference 3x3
// convolution followed by shift, optional 2x2 max pooling, rectification,
// DSFP conversion and masking to the valid map size. Counts how often
// pooling, clamping of negatives and saturation were exercised.
module tb_cnn_processing_block;
  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  localparam int M = 6;
  localparam int R = M + 2;
  localparam int N = R * R;

  logic clk = 0, rst_n = 0, en = 0, clr = 0, pool = 0;
  logic [5:0] out_shift = '0;
  logic [4:0] vsize = 5'(M);
  act_t [N-1:0] win, res;
  kernel_t kern;
  int checks = 0, failures = 0, n_pool = 0, n_clamp = 0, n_sat = 0;

  longint sum [M][M];

  cnn_processing_block #(.M(M)) dut (.clk, .rst_n, .en, .clr, .win, .kern,
                                     .pool, .out_shift, .vsize, .res);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    win = '0; kern = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 200; job++) begin
      int nch;
      logic [8:0] exp [N];
      nch = $urandom_range(4, 1);
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) sum[r][c] = 0;
      for (int ch = 0; ch < nch; ch++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) win[i] = act_t'(rand_act(job % 16));
        for (int t = 0; t < TAPS; t++) kern[t] = coef_t'(rand_coef(4095));
        en = 1; clr = (ch == 0);
        for (int r = 0; r < M; r++)
          for (int c = 0; c < M; c++)
            for (int dr = 0; dr < 3; dr++)
              for (int dc = 0; dc < 3; dc++)
                sum[r][c] += ref_act_val(win[(r+dr)*R + c+dc]) * ref_coef_val(kern[3*dr+dc]);
        @(posedge clk);
      end
      @(negedge clk);
      en = 0; clr = 0;
      pool = 1'($urandom);
      out_shift = 6'($urandom_range(16, 0));
      vsize = 5'($urandom_range(M, 1));
      #1;
      for (int i = 0; i < N; i++) exp[i] = 9'd0;
      if (pool) begin
        n_pool++;
        for (int i = 0; i < vsize / 2; i++)
          for (int j = 0; j < vsize / 2; j++) begin
            longint mx;
            mx = sum[2*i][2*j];
            if (sum[2*i][2*j+1] > mx) mx = sum[2*i][2*j+1];
            if (sum[2*i+1][2*j] > mx) mx = sum[2*i+1][2*j];
            if (sum[2*i+1][2*j+1] > mx) mx = sum[2*i+1][2*j+1];
            exp[(i+1)*R + j+1] = ref_to_act(mx, out_shift);
          end
      end else begin
        for (int r = 0; r < vsize; r++)
          for (int c = 0; c < vsize; c++) begin
            exp[(r+1)*R + c+1] = ref_to_act(sum[r][c], out_shift);
            if (sum[r][c] < 0) n_clamp++;
            if (exp[(r+1)*R + c+1] == 9'h1FF) n_sat++;
          end
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (res[i] != exp[i]) begin
          failures++;
          if (failures < 10) $display("FAIL job=%0d pix=%0d res=%h exp=%h pool=%0d sh=%0d vs=%0d",
                                      job, i, res[i], exp[i], pool, out_shift, vsize);
        end
      end
    end
    checks++;
    if (n_pool == 0 || n_clamp == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL coverage pool=%0d clamp=%0d sat=%0d", n_pool, n_clamp, n_sat);
    end
    $display("coverage: pool=%0d clamp=%0d sat=%0d", n_pool, n_clamp, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
