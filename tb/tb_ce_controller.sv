// tb_ce_controller -- runs a 3-layer program through the controller with
// NE = 4 and checks, cycle by cycle, every strobe and address it issues
// against a sequence generated from the data arrangement (image word
// in_base+g, coefficient words in ascending order from coef_base, write-back
// to out_base+fg, ring load then NE steps per imagery group). Also checks
// the cycle count per layer, 2 + nfg*(nig*(NE+2)+1), busy/done behaviour,
// that a second start is ignored while busy, and the event counters.
module tb_ce_controller;
  import cnn_dsa_pkg::*;

  localparam int NE = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic instr_en;
  logic [PC_W-1:0] instr_addr;
  layer_t instr_rdata;
  logic img_en, img_we, coef_en, mac_en, acc_clr, pool, ring_load, ring_shift;
  logic [IADDR_W-1:0] img_addr;
  logic [CADDR_W-1:0] coef_addr;
  logic [5:0] out_shift;
  logic [4:0] vsize;
  logic [31:0] n_layers, n_steps;
  int checks = 0, failures = 0;

  layer_t prog [4];

  typedef struct packed {
    logic instr_en, img_en, img_we;
    logic [IADDR_W-1:0] img_addr;
    logic coef_en;
    logic [CADDR_W-1:0] coef_addr;
    logic mac_en, acc_clr, ring_load, ring_shift;
  } cyc_t;
  cyc_t exp_q [$];

  ce_controller #(.NE(NE)) dut (.*);

  always #5 clk = ~clk;

  // descriptor memory model: one cycle latency
  always_ff @(posedge clk) if (instr_en) instr_rdata <= prog[instr_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic layer_t mk(int ib, int ob, int cb, int nig, int nfg, bit pl, bit last);
    layer_t l;
    l = '0;
    l.in_base = IADDR_W'(ib); l.out_base = IADDR_W'(ob); l.coef_base = CADDR_W'(cb);
    l.nig = 8'(nig); l.nfg = 8'(nfg); l.pool = pl; l.last = last;
    l.vsize = 5'(7); l.out_shift = 6'(3);
    return l;
  endfunction

  initial begin
    int total_steps;
    prog[0] = mk(0, 10, 5, 2, 3, 0, 0);
    prog[1] = mk(10, 20, 100, 3, 1, 1, 0);
    prog[2] = mk(20, 0, 300, 1, 2, 0, 1);
    prog[3] = mk(0, 1, 0, 1, 1, 0, 1);
    total_steps = 0;
    for (int l = 0; l < 3; l++) begin
      cyc_t c;
      int cp;
      cp = prog[l].coef_base;
      c = '0; c.instr_en = 1; exp_q.push_back(c);
      c = '0; exp_q.push_back(c);
      for (int fg = 0; fg < prog[l].nfg; fg++) begin
        for (int g = 0; g < prog[l].nig; g++) begin
          c = '0; c.img_en = 1; c.img_addr = prog[l].in_base + IADDR_W'(g); exp_q.push_back(c);
          c = '0; c.ring_load = 1; c.coef_en = 1; c.coef_addr = CADDR_W'(cp); cp++; exp_q.push_back(c);
          for (int s = 0; s < NE; s++) begin
            c = '0; c.mac_en = 1; c.ring_shift = 1; c.acc_clr = (g == 0 && s == 0);
            if (s < NE - 1) begin c.coef_en = 1; c.coef_addr = CADDR_W'(cp); cp++; end
            exp_q.push_back(c);
            total_steps++;
          end
        end
        c = '0; c.img_en = 1; c.img_we = 1; c.img_addr = prog[l].out_base + IADDR_W'(fg); exp_q.push_back(c);
      end
    end
    // cycle-count formula per layer
    checks++;
    if (exp_q.size() != (2 + 3*(2*(NE+2)+1)) + (2 + 1*(3*(NE+2)+1)) + (2 + 2*(1*(NE+2)+1))) failures++;

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++; if (!busy) failures++;
    for (int i = 0; exp_q.size() > 0; i++) begin
      cyc_t got, e;
      got = '{instr_en, img_en, img_we, img_addr, coef_en, coef_addr, mac_en, acc_clr, ring_load, ring_shift};
      e = exp_q.pop_front();
      // don't-care fields when a strobe is low
      if (!e.img_en) begin got.img_addr = '0; got.img_we = '0; end
      if (!e.coef_en) got.coef_addr = '0;
      checks++;
      if (got != e) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d got=%h exp=%h", i, got, e);
      end
      if (i == 5) start = 1;       // ignored while busy
      if (i == 6) start = 0;
      // layer parameters visible while a layer runs
      if (e.mac_en) begin
        checks++;
        if (out_shift != 6'd3 || vsize != 5'd7) failures++;
      end
      @(negedge clk);
    end
    // DONE cycle, then idle with done set
    checks++; if (!busy || done) failures++;
    @(negedge clk);
    checks++; if (busy || !done) failures++;
    checks++; if (n_layers != 3 || n_steps != 32'(total_steps)) begin
      failures++;
      $display("FAIL counters layers=%0d steps=%0d exp %0d", n_layers, n_steps, total_steps);
    end
    // a new start clears done
    start = 1;
    @(negedge clk);
    start = 0;
    checks++; if (done || !busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
