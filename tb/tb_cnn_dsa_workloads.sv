// tb_cnn_dsa_workloads -- runs the three layer rewritings of the original
// design on the whole accelerator (M = 8, NE = 4) and compares each with the
// original, un-rewritten network computed directly:
//  1. residual shortcut (N = 4): [W1|P1], [[W2,P0],[P0,P1]], [P1;P1] against
//     y = Q(Q(W2 * Q(W1 * x)) + x);
//  2. depthwise + pointwise (P = 4, Q = 8): diagonal depthwise layer and a
//     centre-only 1x1 layer against per-channel convolution followed by a
//     pointwise sum;
//  3. fully-connected on a 7 x 7 map as three chained 3x3 layers: the centre
//     output pixel against three valid (unpadded) convolutions 7->5->3->1.
// Q() is the DSFP conversion after the layer's shift. Identity kernels hold
// 2^out_shift in the centre so that they pass activations unchanged. Every
// run's cycle count from start to irq is checked as well.
module tb_cnn_dsa_workloads;
  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  localparam int M = 8, NE = 4, IW = 32, CW = 512;
  localparam int R = M + 2, N = R * R, CMAX = 8, LMAX = 3;

  logic clk = 0, rst_n = 0;
  logic host_in_valid = 0, host_in_ready;
  logic [31:0] host_in_data = '0;
  logic host_out_valid, host_out_ready;
  logic [31:0] host_out_data;
  logic irq;

  cnn_dsa_top #(.M(M), .NE(NE), .IMG_WORDS(IW), .COEF_WORDS(CW)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int nz [string];
  logic [31:0] rxq [$];

  // model description filled per workload
  int nl, vs0;
  int l_nig [LMAX], l_nfg [LMAX], l_sh [LMAX];
  logic [14:0] Wt [LMAX][CMAX][CMAX][TAPS];
  logic [8:0]  X   [CMAX][M][M];
  logic [8:0]  OUT [CMAX][N];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign host_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && host_out_valid) rxq.push_back(host_out_data);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(logic [31:0] w);
    @(negedge clk);
    host_in_valid = 1; host_in_data = w;
    #1;
    while (!host_in_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    host_in_valid = 0;
  endtask

  function automatic logic [31:0] hdr(host_op_e op, region_e rg, int ce, int word, int lane);
    host_cmd_t h;
    h.op = op; h.region = rg; h.ce = 4'(ce); h.word = 16'(word); h.lane = 8'(lane);
    return h;
  endfunction

  task automatic wr(region_e rg, int ce, int word, int lane, logic [31:0] d);
    send(hdr(OP_WRITE, rg, ce, word, lane));
    send(d);
  endtask

  function automatic logic [14:0] ident(int sh);   // coefficient of value 2^sh
    return {1'b0, 2'd0, 12'(1 << sh)};
  endfunction

  task automatic clear_w();
    for (int l = 0; l < LMAX; l++) for (int f = 0; f < CMAX; f++)
      for (int c = 0; c < CMAX; c++) for (int t = 0; t < TAPS; t++) Wt[l][f][c][t] = 15'd0;
  endtask

  // load image, coefficients (ring order) and descriptors, run, read back
  task automatic run_model();
    int ib, ob, cb, ltot, t0;
    layer_t lay;
    for (int c = 0; c < l_nig[0] * NE; c++)
      for (int i = 0; i < N; i++) begin
        int r, cc;
        r = i / R - 1; cc = i % R - 1;
        wr(RG_IMAGE, c % NE, c / NE, i,
           (r >= 0 && cc >= 0 && r < vs0 && cc < vs0) ? 32'(X[c][r][cc]) : 32'd0);
      end
    ib = 0; ob = IW / 2; cb = 0; ltot = 0;
    for (int l = 0; l < nl; l++) begin
      for (int k = 0; k < NE; k++)
        for (int fg = 0; fg < l_nfg[l]; fg++)
          for (int g = 0; g < l_nig[l]; g++)
            for (int s = 0; s < NE; s++)
              for (int t = 0; t < TAPS; t++)
                wr(RG_COEF, k, cb + (fg * l_nig[l] + g) * NE + s, t,
                   32'(Wt[l][fg * NE + k][g * NE + (k - s + NE) % NE][t]));
      lay = '0;
      lay.in_base = IADDR_W'(ib); lay.out_base = IADDR_W'(ob); lay.coef_base = CADDR_W'(cb);
      lay.nig = 8'(l_nig[l]); lay.nfg = 8'(l_nfg[l]); lay.vsize = 5'(vs0);
      lay.out_shift = 6'(l_sh[l]); lay.last = (l == nl - 1);
      wr(RG_INSTR, 0, l, 0, lay[31:0]);
      wr(RG_INSTR, 0, l, 1, lay[63:32]);
      cb += l_nfg[l] * l_nig[l] * NE;
      ltot += 2 + l_nfg[l] * (l_nig[l] * (NE + 2) + 1);
      begin int tmp; tmp = ib; ib = ob; ob = tmp; end
    end
    send(hdr(OP_WRITE, RG_CTRL, 0, 0, 0));
    send(32'd1);
    t0 = cyc;
    while (!irq) begin
      @(posedge clk);
      #1;
    end
    checks++;
    if (cyc - t0 != ltot + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc - t0, ltot + 1);
    end
    for (int f = 0; f < l_nfg[nl - 1] * NE; f++)
      for (int i = 0; i < N; i++) begin
        send(hdr(OP_READ, RG_IMAGE, f % NE, ib + f / NE, i));
        while (rxq.size() == 0) @(posedge clk);
        OUT[f][i] = rxq.pop_front();
      end
  endtask

  function automatic logic [8:0] px(int c, int r, int cc);
    if (r < 0 || cc < 0 || r >= vs0 || cc >= vs0) return 9'd0;
    return X[c][r][cc];
  endfunction

  task automatic cmp(int f, int i, logic [8:0] e, string what);
    checks++;
    if (e != 0) nz[what] = nz.exists(what) ? nz[what] + 1 : 1;
    if (OUT[f][i] != e) begin
      failures++;
      if (failures < 12) $display("FAIL %s ch %0d pix %0d got %h exp %h", what, f, i, OUT[f][i], e);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- 1. residual shortcut, N = 4 ----------------
    begin
      localparam int NN = 4;
      logic [14:0] W1 [NN][NN][TAPS], W2 [NN][NN][TAPS];
      logic [8:0] h [NN][M][M], a [NN][M][M];
      int s1, s2;
      s1 = 6; s2 = 7;
      vs0 = M; nl = 3;
      for (int c = 0; c < NN; c++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) X[c][r][cc] = rand_act(3);
      for (int f = 0; f < NN; f++) for (int c = 0; c < NN; c++) for (int t = 0; t < TAPS; t++) begin
        W1[f][c][t] = rand_coef(255); W2[f][c][t] = rand_coef(255);
      end
      clear_w();
      l_nig = '{1, 2, 2}; l_nfg = '{2, 2, 1}; l_sh = '{s1, s2, 0};
      for (int f = 0; f < NN; f++) for (int c = 0; c < NN; c++) for (int t = 0; t < TAPS; t++) begin
        Wt[0][f][c][t] = W1[f][c][t];                                  // [W1 | P1]
        Wt[1][f][c][t] = W2[f][c][t];                                  // [[W2,P0],[P0,P1]]
      end
      for (int n = 0; n < NN; n++) begin
        Wt[0][NN + n][n][4] = ident(s1);
        Wt[1][NN + n][NN + n][4] = ident(s2);
        Wt[2][n][n][4] = ident(0);                                     // [P1 ; P1]
        Wt[2][n][NN + n][4] = ident(0);
      end
      run_model();
      // reference: the original block
      for (int f = 0; f < NN; f++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) begin
        longint s;
        s = 0;
        for (int c = 0; c < NN; c++) for (int t = 0; t < TAPS; t++)
          s += ref_act_val(px(c, r + t/3 - 1, cc + t%3 - 1)) * ref_coef_val(W1[f][c][t]);
        h[f][r][cc] = ref_to_act(s, s1);
      end
      for (int f = 0; f < NN; f++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) begin
        longint s;
        s = 0;
        for (int c = 0; c < NN; c++) for (int t = 0; t < TAPS; t++) begin
          int rr, c2;
          rr = r + t/3 - 1; c2 = cc + t%3 - 1;
          if (rr >= 0 && c2 >= 0 && rr < M && c2 < M) s += ref_act_val(h[c][rr][c2]) * ref_coef_val(W2[f][c][t]);
        end
        a[f][r][cc] = ref_to_act(s, s2);
      end
      for (int f = 0; f < NN; f++) for (int i = 0; i < N; i++) begin
        int r, cc;
        r = i / R - 1; cc = i % R - 1;
        if (r >= 0 && cc >= 0 && r < M && cc < M)
          cmp(f, i, ref_to_act(ref_act_val(a[f][r][cc]) + ref_act_val(X[f][r][cc]), 0), "resnet");
        else cmp(f, i, 9'd0, "resnet border");
      end
    end

    // ---------------- 2. depthwise P = 4 + pointwise Q = 8 ----------------
    begin
      localparam int PP = 4, QQ = 8;
      logic [14:0] Wd [PP][TAPS];
      logic [14:0] Y [QQ][PP];
      logic [8:0] d [PP][M][M];
      int s1, s2;
      s1 = 5; s2 = 6;
      vs0 = M; nl = 2;
      for (int c = 0; c < PP; c++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) X[c][r][cc] = rand_act(4);
      for (int p = 0; p < PP; p++) for (int t = 0; t < TAPS; t++) Wd[p][t] = rand_coef(1023);
      for (int q = 0; q < QQ; q++) for (int p = 0; p < PP; p++) Y[q][p] = rand_coef(1023);
      clear_w();
      l_nig = '{1, 1, 0}; l_nfg = '{1, 2, 0}; l_sh = '{s1, s2, 0};
      for (int p = 0; p < PP; p++) for (int t = 0; t < TAPS; t++) Wt[0][p][p][t] = Wd[p][t];
      for (int q = 0; q < QQ; q++) for (int p = 0; p < PP; p++) Wt[1][q][p][4] = Y[q][p];
      run_model();
      for (int p = 0; p < PP; p++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) begin
        longint s;
        s = 0;
        for (int t = 0; t < TAPS; t++) s += ref_act_val(px(p, r + t/3 - 1, cc + t%3 - 1)) * ref_coef_val(Wd[p][t]);
        d[p][r][cc] = ref_to_act(s, s1);
      end
      for (int q = 0; q < QQ; q++) for (int i = 0; i < N; i++) begin
        int r, cc;
        r = i / R - 1; cc = i % R - 1;
        if (r >= 0 && cc >= 0 && r < M && cc < M) begin
          longint s;
          s = 0;
          for (int p = 0; p < PP; p++) s += ref_act_val(d[p][r][cc]) * ref_coef_val(Y[q][p]);
          cmp(q, i, ref_to_act(s, s2), "mobilenet");
        end else cmp(q, i, 9'd0, "mobilenet border");
      end
    end

    // ---------------- 3. FC on a 7 x 7 map as three 3x3 layers ----------------
    begin
      localparam int CC = 4;
      logic [14:0] K [3][CC][CC][TAPS];
      logic [8:0] m1 [CC][5][5], m2 [CC][3][3];
      int sh [3];
      sh = '{6, 10, 12};
      vs0 = 7; nl = 3;
      for (int c = 0; c < CC; c++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) X[c][r][cc] = rand_act(3);
      clear_w();
      l_nig = '{1, 1, 1}; l_nfg = '{1, 1, 1}; l_sh = sh;
      for (int l = 0; l < 3; l++) for (int f = 0; f < CC; f++) for (int c = 0; c < CC; c++) for (int t = 0; t < TAPS; t++) begin
        K[l][f][c][t] = rand_coef(511) & 15'h3FFF;
        if ($urandom_range(3, 0) == 0) K[l][f][c][t][14] = 1'b1;
        Wt[l][f][c][t] = K[l][f][c][t];
      end
      run_model();
      // valid convolutions 7 -> 5 -> 3 -> 1
      for (int f = 0; f < CC; f++) for (int r = 0; r < 5; r++) for (int c2 = 0; c2 < 5; c2++) begin
        longint s;
        s = 0;
        for (int c = 0; c < CC; c++) for (int t = 0; t < TAPS; t++)
          s += ref_act_val(X[c][r + t/3][c2 + t%3]) * ref_coef_val(K[0][f][c][t]);
        m1[f][r][c2] = ref_to_act(s, sh[0]);
      end
      for (int f = 0; f < CC; f++) for (int r = 0; r < 3; r++) for (int c2 = 0; c2 < 3; c2++) begin
        longint s;
        s = 0;
        for (int c = 0; c < CC; c++) for (int t = 0; t < TAPS; t++)
          s += ref_act_val(m1[c][r + t/3][c2 + t%3]) * ref_coef_val(K[1][f][c][t]);
        m2[f][r][c2] = ref_to_act(s, sh[1]);
      end
      for (int f = 0; f < CC; f++) begin
        longint s;
        s = 0;
        for (int c = 0; c < CC; c++) for (int t = 0; t < TAPS; t++)
          s += ref_act_val(m2[c][t/3][t%3]) * ref_coef_val(K[2][f][c][t]);
        cmp(f, 4 * R + 4, ref_to_act(s, sh[2]), "fc centre");
      end
    end

    foreach (nz[w]) $display("non-zero expected values, %s: %0d", w, nz[w]);
    checks++;
    if (!nz.exists("resnet") || !nz.exists("mobilenet") || !nz.exists("fc centre")) begin
      failures++;
      $display("FAIL a workload produced only zeros");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
