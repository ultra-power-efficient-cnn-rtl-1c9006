// tb_output_router -- issues random reads (image pixels, coefficients,
// status words) while the receiver randomly stalls, honouring rd_ok, and
// checks that the returned words arrive in order, with the right values, and
// that rd_ok actually throttled the reads at least once, and that at least
// 500 words came back.
module tb_output_router;
  import cnn_dsa_pkg::*;

  localparam int M = 2, NE = 3, N = (M + 2) * (M + 2);
  logic clk = 0, rst_n = 0, rd_valid = 0, busy = 0, done = 0;
  bus_req_t req;
  act_t [N-1:0] img_rdata [NE];
  kernel_t coef_rdata [NE];
  logic [31:0] n_layers = 32'd7, n_steps = 32'd1234;
  logic rd_ok, out_valid, out_ready = 0;
  logic [31:0] out_data;
  logic [31:0] exp_q [$];
  int checks = 0, failures = 0, throttled = 0, received = 0;

  output_router #(.M(M), .NE(NE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    received++;
    if (exp_q.size() == 0 || out_data != exp_q[0]) begin
      failures++;
      if (failures < 10) $display("FAIL got %h exp %h", out_data, exp_q.size() ? exp_q[0] : 0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // the previous read's data is on the buffer outputs now
      for (int k = 0; k < NE; k++) begin
        for (int i = 0; i < N; i++) img_rdata[k][i] = act_t'(9'($urandom));
        for (int t = 0; t < TAPS; t++) coef_rdata[k][t] = coef_t'(15'($urandom));
      end
      busy = 1'($urandom); done = 1'($urandom);
      out_ready = (it < 1500) ? ($urandom_range(3, 0) == 0) : 1'($urandom);
      rd_valid = 0;
      if ($urandom_range(1, 0) == 1) begin
        if (!rd_ok) throttled++;
        else begin
          rd_valid   = 1;
          req        = '0;
          req.region = region_e'($urandom_range(3, 0));
          if (req.region == RG_INSTR) req.region = RG_IMAGE;
          req.ce     = 4'($urandom_range(NE - 1, 0));
          req.lane   = (req.region == RG_COEF) ? 8'($urandom_range(8, 0)) : 8'($urandom_range(N - 1, 0));
          req.word   = (req.region == RG_CTRL) ? 16'($urandom_range(3, 0)) : 16'($urandom);
        end
      end
      @(negedge clk);
      // data for the read issued last cycle: change buffer outputs now and
      // record the value the router must capture
      for (int k = 0; k < NE; k++) begin
        for (int i = 0; i < N; i++) img_rdata[k][i] = act_t'(9'($urandom));
        for (int t = 0; t < TAPS; t++) coef_rdata[k][t] = coef_t'(15'($urandom));
      end
      if (rd_valid) begin
        unique case (req.region)
          RG_IMAGE: exp_q.push_back(32'(img_rdata[req.ce][req.lane]));
          RG_COEF:  exp_q.push_back(32'(coef_rdata[req.ce][req.lane[3:0]]));
          default:  exp_q.push_back(req.word == 0 ? {30'b0, busy, done} :
                                    req.word == 1 ? n_layers :
                                    req.word == 2 ? n_steps : 32'd0);
        endcase
      end
      rd_valid = 0;
    end
    out_ready = 1;
    repeat (40) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || throttled == 0 || received < 500) begin
      failures++;
      $display("FAIL left=%0d throttled=%0d received=%0d", exp_q.size(), throttled, received);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
