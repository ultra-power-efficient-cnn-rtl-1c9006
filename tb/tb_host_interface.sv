// tb_host_interface -- streams random read, write and NOP commands, with
// gaps in the input stream and random rd_ok, and checks that every write
// leaves as one bus request carrying its header fields and data word, every
// read as one request issued with its header and only when rd_ok is high,
// NOPs produce nothing, and irq follows done.
module tb_host_interface;
  import cnn_dsa_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, rd_ok = 1, done = 0;
  logic in_ready, irq, req_valid;
  logic [31:0] in_data = '0;
  bus_req_t req;
  bus_req_t exp_q [$];
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, n_held = 0;

  host_interface dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid) begin
      checks++;
      if (exp_q.size() == 0 || req != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL req %h exp %h", req, exp_q.size() ? exp_q[0] : '0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
      if (!req.we && !rd_ok) failures++;
    end
    checks++;
    if (irq != done) failures++;
  end

  task automatic send(logic [31:0] w);
    @(negedge clk);
    while ($urandom_range(2, 0) == 0) begin
      in_valid = 0;
      @(negedge clk);
    end
    in_valid = 1; in_data = w;
    rd_ok = ($urandom_range(3, 0) != 0);
    done = 1'($urandom);
    #1;
    while (!in_ready) begin
      n_held++;
      @(negedge clk);
      rd_ok = ($urandom_range(3, 0) != 0);
      #1;
    end
    @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      host_cmd_t h;
      bus_req_t e;
      h = host_cmd_t'($urandom);
      h.op = host_op_e'($urandom_range(2, 0));
      e = '0;
      e.region = h.region; e.ce = h.ce; e.word = h.word; e.lane = h.lane;
      if (h.op == OP_WRITE) begin
        logic [31:0] d;
        d = $urandom;
        e.we = 1; e.wdata = d;
        exp_q.push_back(e);
        send(h);
        send(d);
        n_wr++;
      end else if (h.op == OP_READ) begin
        exp_q.push_back(e);
        send(h);
        n_rd++;
      end else begin
        send(h);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_held == 0 || n_wr == 0 || n_rd == 0) begin
      failures++;
      $display("FAIL left=%0d held=%0d", exp_q.size(), n_held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
