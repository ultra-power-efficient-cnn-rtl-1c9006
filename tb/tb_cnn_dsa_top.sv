// tb_cnn_dsa_top -- end-to-end test of the whole accelerator at a reduced
// size (M = 4, NE = 4): through the host command stream it loads a random
// 3-layer model (8 -> 8 channels, 8 -> 4 with 2x2 pooling, 4 -> 8), with
// coefficients placed in the cyclic order the ring needs, and a random input
// image; starts it; while it runs, tries a write (must be dropped), a second
// start (must be ignored) and a status read (must say busy); then reads the
// last layer back with the output stream held off at first and compares
// every pixel with a reference model of the layers. Checks the cycle count
// from start to irq, 2 + nfg*(nig*(NE+2)+1) per layer plus one, and the
// counters, and counts each mechanism: ring steps, layers with several
// imagery groups and filter groups, pooling, rectification of negatives,
// saturation, read back-pressure and output stalls.
module tb_cnn_dsa_top;
  localparam int M = 4, NE = 4, IW = 16, CW = 256, GMAX = 2, NL = 3;
  localparam int L_VS0 = 4;
  localparam int L_NIG [NL] = '{2, 2, 1};
  localparam int L_NFG [NL] = '{2, 1, 2};
  localparam bit L_POOL [NL] = '{0, 1, 0};
  localparam int L_SH [NL] = '{4, 14, 15};
  localparam int WATCHDOG = 400000;

  import cnn_dsa_pkg::*;
  import tb_ref_pkg::*;

  localparam int R = M + 2, N = R * R;
  localparam int CMAX = NE * GMAX;

  logic clk = 0, rst_n = 0;
  logic host_in_valid = 0, host_in_ready;
  logic [31:0] host_in_data = '0;
  logic host_out_valid, host_out_ready;
  logic [31:0] host_out_data;
  logic irq;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [31:0] rxq [$];
  bit stall_out = 0;
  int n_rd_held = 0, n_out_stall = 0, n_clamp = 0, n_sat = 0, n_pool = 0;
  int n_multi_ig = 0, n_multi_fg = 0, n_drop = 0, n_start_ign = 0;

  logic [8:0]  A [CMAX][M][M];     // current activations (reference)
  logic [8:0]  B [CMAX][M][M];
  logic [14:0] W [NL][CMAX][CMAX][TAPS];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  assign host_out_ready = !stall_out && ($urandom_range(3, 0) != 0);
  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && host_out_ready) rxq.push_back(host_out_data);
    if (host_out_valid && !host_out_ready) n_out_stall++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL %s", what);
    end
  endtask

  task automatic send(logic [31:0] w, bit is_read);
    @(negedge clk);
    host_in_valid = 1; host_in_data = w;
    #1;
    while (!host_in_ready) begin
      if (is_read) n_rd_held++;
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
    send(hdr(OP_WRITE, rg, ce, word, lane), 0);
    send(d, 0);
  endtask

  task automatic rd_issue(region_e rg, int ce, int word, int lane);
    send(hdr(OP_READ, rg, ce, word, lane), 1);
  endtask

  task automatic rd_wait(int n);
    while (rxq.size() < n) @(posedge clk);
  endtask

  function automatic logic [8:0] pix(int c, int r, int cc, int v);
    if (r < 0 || cc < 0 || r >= v || cc >= v) return 9'd0;
    return A[c][r][cc];
  endfunction

  initial begin
    int ib, ob, cb, v, ltot, steps_exp, t0;
    layer_t lay;
    for (int c = 0; c < CMAX; c++)
      for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) A[c][r][cc] = rand_act(3);
    for (int l = 0; l < NL; l++)
      for (int f = 0; f < CMAX; f++) for (int c = 0; c < CMAX; c++) for (int t = 0; t < TAPS; t++)
        W[l][f][c][t] = rand_coef(4095);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // input image of layer 0: channel c in engine c%NE, word c/NE, zero border
    v = L_VS0;
    for (int c = 0; c < L_NIG[0] * NE; c++)
      for (int i = 0; i < N; i++) begin
        int r, cc;
        r = i / R - 1; cc = i % R - 1;
        wr(RG_IMAGE, c % NE, c / NE, i, 32'(pix(c, r, cc, v)));
      end
    // a spare word that the model never touches, to see a dropped write
    wr(RG_IMAGE, 0, IW - 1, 0, 32'h55);

    // coefficients and descriptors
    ib = 0; ob = IW / 2; cb = 0; ltot = 0; steps_exp = 0;
    for (int l = 0; l < NL; l++) begin
      for (int k = 0; k < NE; k++)
        for (int fg = 0; fg < L_NFG[l]; fg++)
          for (int g = 0; g < L_NIG[l]; g++)
            for (int s = 0; s < NE; s++)
              for (int t = 0; t < TAPS; t++)
                wr(RG_COEF, k, cb + (fg * L_NIG[l] + g) * NE + s, t,
                   32'(W[l][fg * NE + k][g * NE + (k - s + NE) % NE][t]));
      lay = '0;
      lay.in_base = IADDR_W'(ib); lay.out_base = IADDR_W'(ob); lay.coef_base = CADDR_W'(cb);
      lay.nig = 8'(L_NIG[l]); lay.nfg = 8'(L_NFG[l]); lay.pool = L_POOL[l];
      lay.vsize = 5'(v); lay.out_shift = 6'(L_SH[l]); lay.last = (l == NL - 1);
      wr(RG_INSTR, 0, l, 0, lay[31:0]);
      wr(RG_INSTR, 0, l, 1, lay[63:32]);
      cb += L_NFG[l] * L_NIG[l] * NE;
      ltot += 2 + L_NFG[l] * (L_NIG[l] * (NE + 2) + 1);
      steps_exp += L_NFG[l] * L_NIG[l] * NE;
      if (L_NIG[l] > 1) n_multi_ig++;
      if (L_NFG[l] > 1) n_multi_fg++;
      if (L_POOL[l]) n_pool++;
      if (L_POOL[l]) v = v / 2;
      begin int tmp; tmp = ib; ib = ob; ob = tmp; end
    end

    // start, then while busy: a write that must be dropped, a start that
    // must be ignored, and a status read that must say busy
    send(hdr(OP_WRITE, RG_CTRL, 0, 0, 0), 0);
    send(32'd1, 0);
    t0 = cyc;
    if (ltot > 40) begin
      wr(RG_IMAGE, 0, IW - 1, 0, 32'h1AA);
      n_drop++;
      wr(RG_CTRL, 0, 0, 0, 32'd1);
      n_start_ign++;
      rd_issue(RG_CTRL, 0, 0, 0);
      rd_wait(1);
      chk(rxq[0][1] == 1'b1, "status busy while running");
      void'(rxq.pop_front());
    end
    while (!irq) begin
      @(posedge clk);
      #1;
    end
    $display("run took %0d cycles, expected %0d", cyc - t0, ltot + 1);
    chk(cyc - t0 == ltot + 1, "cycle count start to irq");

    // reference model of all layers
    v = L_VS0;
    for (int l = 0; l < NL; l++) begin
      longint sum [M][M];
      int vo;
      vo = L_POOL[l] ? v / 2 : v;
      for (int f = 0; f < L_NFG[l] * NE; f++) begin
        for (int r = 0; r < v; r++) for (int cc = 0; cc < v; cc++) begin
          sum[r][cc] = 0;
          for (int c = 0; c < L_NIG[l] * NE; c++)
            for (int t = 0; t < TAPS; t++)
              sum[r][cc] += ref_act_val(pix(c, r + t / 3 - 1, cc + t % 3 - 1, v)) * ref_coef_val(W[l][f][c][t]);
          if (sum[r][cc] < 0) n_clamp++;
        end
        for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) B[f][r][cc] = 9'd0;
        for (int r = 0; r < vo; r++) for (int cc = 0; cc < vo; cc++) begin
          longint x;
          if (L_POOL[l]) begin
            x = sum[2*r][2*cc];
            if (sum[2*r][2*cc+1] > x) x = sum[2*r][2*cc+1];
            if (sum[2*r+1][2*cc] > x) x = sum[2*r+1][2*cc];
            if (sum[2*r+1][2*cc+1] > x) x = sum[2*r+1][2*cc+1];
          end else x = sum[r][cc];
          B[f][r][cc] = ref_to_act(x, L_SH[l]);
          if (B[f][r][cc] == 9'h1FF) n_sat++;
        end
      end
      for (int f = 0; f < CMAX; f++) for (int r = 0; r < M; r++) for (int cc = 0; cc < M; cc++) A[f][r][cc] = B[f][r][cc];
      v = vo;
    end

    // read back the last layer's output with the output stream held off at first
    ob = (NL % 2 == 1) ? IW / 2 : 0;
    for (int f = 0; f < L_NFG[NL - 1] * NE; f++) begin
      if (f == 0) begin
        stall_out = 1;
        fork begin
          repeat (60) @(posedge clk);
          stall_out = 0;
        end join_none
      end
      for (int i = 0; i < N; i++) rd_issue(RG_IMAGE, f % NE, ob + f / NE, i);
      rd_wait(N);
      for (int i = 0; i < N; i++) begin
        logic [8:0] e;
        int r, cc;
        r = i / R - 1; cc = i % R - 1;
        e = pix(f, r, cc, v);
        checks++;
        if (rxq[i][8:0] != e || rxq[i][31:9] != 0) begin
          failures++;
          if (failures < 12) $display("FAIL out ch %0d pix %0d got %h exp %h", f, i, rxq[i], e);
        end
      end
      rxq.delete();
    end
    // dropped write, status, counters
    rd_issue(RG_IMAGE, 0, IW - 1, 0);
    rd_issue(RG_CTRL, 0, 0, 0);
    rd_issue(RG_CTRL, 0, 1, 0);
    rd_issue(RG_CTRL, 0, 2, 0);
    rd_wait(4);
    chk(rxq[0] == 32'h55, "write while busy dropped");
    chk(rxq[1] == 32'h1, "status done, not busy");
    chk(rxq[2] == 32'(NL), "layer counter");
    chk(rxq[3] == 32'(steps_exp), "ring step counter");
    $display("events: ring_steps=%0d multi_imagery_group_layers=%0d multi_filter_group_layers=%0d pool_layers=%0d",
             rxq[3], n_multi_ig, n_multi_fg, n_pool);
    $display("events: clamped=%0d saturated=%0d read_held=%0d out_stalled=%0d dropped_writes=%0d ignored_starts=%0d",
             n_clamp, n_sat, n_rd_held, n_out_stall, n_drop, n_start_ign);
    chk(rxq[3] > 0, "ring shifts happened");
    chk(n_multi_ig > 0 || NE * GMAX == NE, "multi imagery group layer");
    chk(n_multi_fg > 0 || NE * GMAX == NE, "multi filter group layer");
    chk(n_pool > 0, "pooling happened");
    chk(n_clamp > 0, "rectification clamped negatives");
    chk(n_sat > 0, "saturation happened");
    chk(n_rd_held > 0, "read back-pressure happened");
    chk(n_out_stall > 0, "output stall happened");
    chk(n_drop > 0 || ltot <= 40, "write while busy attempted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cnn_dsa_top #(.M(M), .NE(NE), .IMG_WORDS(IW), .COEF_WORDS(CW)) dut (.*);
endmodule
