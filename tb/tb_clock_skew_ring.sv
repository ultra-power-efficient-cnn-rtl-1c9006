// tb_clock_skew_ring -- loads distinct regions into a 5-engine ring (M = 2)
// and checks after every shift that engine k holds what engine (k-s) mod NE
// loaded, that a full turn restores the start, that the ring holds when
// neither load nor shift is given and that load wins over shift.
module tb_clock_skew_ring;
  import cnn_dsa_pkg::*;

  localparam int M = 2, NE = 5, N = (M + 2) * (M + 2);
  logic clk = 0, load = 0, shift = 0;
  act_t [N-1:0] own [NE];
  act_t [N-1:0] held [NE];
  act_t [N-1:0] orig [NE];
  int checks = 0, failures = 0;

  clock_skew_ring #(.M(M), .NE(NE)) dut (.clk, .load, .shift, .own, .held);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_rot(int s);
    for (int k = 0; k < NE; k++) begin
      checks++;
      if (held[k] != orig[(k - s + 10 * NE) % NE]) begin
        failures++;
        if (failures < 10) $display("FAIL s=%0d engine %0d", s, k);
      end
    end
  endtask

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      @(negedge clk);
      for (int k = 0; k < NE; k++) begin
        for (int i = 0; i < N; i++) own[k][i] = act_t'(9'($urandom));
        orig[k] = own[k];
      end
      load = 1; shift = (rep % 2 == 1);
      @(negedge clk);
      load = 0; shift = 0;
      expect_rot(0);
      for (int s = 1; s <= NE + 2; s++) begin
        shift = 1;
        @(negedge clk);
        shift = 0;
        expect_rot(s);
        @(negedge clk);          // idle: must hold
        expect_rot(s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
