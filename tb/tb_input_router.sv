// tb_input_router -- drives random host requests into the input router
// (NE = 4) and checks the per-engine enables, broadcast address/data, the
// start pulse, that writes are dropped and start ignored while busy, and
// that descriptors written as two halves read back whole on the controller
// port one cycle after the request.
module tb_input_router;
  import cnn_dsa_pkg::*;

  localparam int NE = 4;
  logic clk = 0, rst_n = 0, busy = 0, req_valid = 0;
  bus_req_t req;
  logic [NE-1:0] img_en, coef_en;
  logic img_we, coef_we, start, instr_en = 0;
  logic [IADDR_W-1:0] img_addr;
  logic [7:0] img_lane;
  act_t img_pix;
  logic [CADDR_W-1:0] coef_addr;
  logic [3:0] coef_lane;
  coef_t coef_val;
  logic [PC_W-1:0] instr_addr = '0;
  layer_t instr_rdata;
  logic [63:0] shadow [INSTR_WORDS];
  int checks = 0, failures = 0;

  input_router #(.NE(NE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill every descriptor once, both halves
    for (int a = 0; a < 2 * INSTR_WORDS; a++) begin
      @(negedge clk);
      req_valid = 1; busy = 0; req = '0; req.we = 1; req.region = RG_INSTR;
      req.word = 16'(a / 2); req.lane = 8'(a % 2); req.wdata = $urandom;
      if (a % 2) shadow[a / 2][63:32] = req.wdata;
      else       shadow[a / 2][31:0]  = req.wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      req_valid  = ($urandom_range(3, 0) != 0);
      busy       = ($urandom_range(4, 0) == 0);
      req.we     = 1'($urandom);
      req.region = region_e'($urandom_range(3, 0));
      req.ce     = 4'($urandom_range(NE - 1, 0));
      req.word   = 16'($urandom_range(INSTR_WORDS - 1, 0));
      req.lane   = 8'($urandom_range(8, 0));
      req.wdata  = $urandom;
      if (req.region == RG_CTRL && $urandom_range(1, 0) == 1) begin
        req.word = '0; req.wdata[0] = 1'b1;
      end
      #1;
      begin
        logic [NE-1:0] ei, ec;
        bit hit;
        hit = req_valid && !(busy && req.we);
        ei = '0; ec = '0;
        if (hit && req.region == RG_IMAGE) ei[req.ce] = 1'b1;
        if (hit && req.region == RG_COEF)  ec[req.ce] = 1'b1;
        chk(img_en == ei && coef_en == ec, "enables");
        if (ei != 0) chk(img_we == req.we && img_addr == IADDR_W'(req.word) && img_lane == req.lane
                         && img_pix == act_t'(req.wdata[8:0]), "image fields");
        if (ec != 0) chk(coef_we == req.we && coef_addr == req.word && coef_lane == req.lane[3:0]
                         && coef_val == coef_t'(req.wdata[14:0]), "coef fields");
        chk(start == (req_valid && req.we && !busy && req.region == RG_CTRL && req.word == 0 && req.wdata[0]),
            "start");
        if (req_valid && req.we && req.region == RG_INSTR) begin
          if (req.lane[0]) shadow[req.word][63:32] = req.wdata;
          else             shadow[req.word][31:0]  = req.wdata;
        end
      end
    end
    @(negedge clk);
    req_valid = 0;
    // read back every descriptor on the controller port
    for (int a = 0; a < INSTR_WORDS; a++) begin
      @(negedge clk);
      instr_en = 1; instr_addr = PC_W'(a);
      @(negedge clk);
      instr_en = 0;
      chk(instr_rdata == layer_t'(shadow[a]), "descriptor");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
