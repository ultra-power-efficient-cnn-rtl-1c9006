// ce_controller -- the CNN processing engine controller. It runs a model
// layer by layer from the descriptor memory and drives all engines and the
// ring in lock step.
//
// Data arrangement (after the published steps (a)-(g)): input channel
// i = g*NE + k of a layer sits in engine k at image word in_base + g
// (imagery group g); output channel f = fg*NE + k is computed by engine k
// and written to its image word out_base + fg (filter group fg). For each
// filter group and each imagery group the controller reads the group's
// regions from all image buffers into the ring, then runs NE conv steps: in
// step s engine k holds input channel g*NE + ((k-s) mod NE), received from
// its upstream neighbour, and reads the matching kernel. Engine k's kernels
// therefore sit at coefficient word coef_base + (fg*nig + g)*NE + s, read
// in plain ascending order. After the last imagery group the accumulators
// are written back (rectified, optionally pooled) in one cycle.
//
// States and timing: IDLE -start-> FETCH (descriptor read) -> LATCH, then
// per imagery group IMG_RD (image read) -> LOAD (ring load, first kernel
// read) -> NE x STEP (one MAC cycle each, ring shift, next kernel read),
// then WB per filter group, and FETCH for the next descriptor or DONE after
// the one marked last. A layer takes 2 + nfg*(nig*(NE+2) + 1) cycles. busy
// is high from the cycle after start until DONE; done is a sticky flag,
// cleared by the next start. nig and nfg of 0 are treated as 1.
module ce_controller
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned NE = NE_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // descriptor memory read port (data one cycle after instr_en)
  output logic               instr_en,
  output logic [PC_W-1:0]    instr_addr,
  input  layer_t             instr_rdata,
  // engines
  output logic               img_en,
  output logic               img_we,
  output logic [IADDR_W-1:0] img_addr,
  output logic               coef_en,
  output logic [CADDR_W-1:0] coef_addr,
  output logic               mac_en,
  output logic               acc_clr,
  output logic               pool,
  output logic [5:0]         out_shift,
  output logic [4:0]         vsize,
  // ring
  output logic               ring_load,
  output logic               ring_shift,
  // event counters for observation
  output logic [31:0]        n_layers,
  output logic [31:0]        n_steps
);
  localparam int unsigned SW = (NE > 1) ? $clog2(NE) : 1;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_LATCH, S_IMG_RD, S_LOAD, S_STEP, S_WB, S_DONE} state_e;

  state_e             st;
  layer_t             lay;
  logic [PC_W-1:0]    pc;
  logic [7:0]         g, fg, nig_m1, nfg_m1;
  logic [SW-1:0]      s;
  logic [CADDR_W-1:0] cptr;

  assign nig_m1    = (lay.nig == 0) ? 8'd0 : lay.nig - 8'd1;
  assign nfg_m1    = (lay.nfg == 0) ? 8'd0 : lay.nfg - 8'd1;
  assign busy      = (st != S_IDLE);
  assign pool      = lay.pool;
  assign out_shift = lay.out_shift;
  assign vsize     = lay.vsize;

  always_comb begin
    instr_en   = (st == S_FETCH);
    instr_addr = pc;
    img_en     = (st == S_IMG_RD) || (st == S_WB);
    img_we     = (st == S_WB);
    img_addr   = (st == S_WB) ? lay.out_base + IADDR_W'(fg) : lay.in_base + IADDR_W'(g);
    coef_en    = (st == S_LOAD) || ((st == S_STEP) && (s != SW'(NE - 1)));
    coef_addr  = cptr;
    ring_load  = (st == S_LOAD);
    ring_shift = (st == S_STEP);
    mac_en     = (st == S_STEP);
    acc_clr    = (st == S_STEP) && (g == 8'd0) && (s == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      lay      <= '0;
      pc       <= '0;
      g        <= '0;
      fg       <= '0;
      s        <= '0;
      cptr     <= '0;
      done     <= 1'b0;
      n_layers <= '0;
      n_steps  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          pc   <= '0;
          done <= 1'b0;
          st   <= S_FETCH;
        end
        S_FETCH: st <= S_LATCH;
        S_LATCH: begin
          lay  <= instr_rdata;
          cptr <= instr_rdata.coef_base;
          g    <= '0;
          fg   <= '0;
          st   <= S_IMG_RD;
        end
        S_IMG_RD: st <= S_LOAD;
        S_LOAD: begin
          cptr <= cptr + 1'b1;
          s    <= '0;
          st   <= S_STEP;
        end
        S_STEP: begin
          n_steps <= n_steps + 1;
          if (s != SW'(NE - 1)) begin
            cptr <= cptr + 1'b1;
            s    <= s + 1'b1;
          end else if (g != nig_m1) begin
            g  <= g + 8'd1;
            st <= S_IMG_RD;
          end else begin
            st <= S_WB;
          end
        end
        S_WB: begin
          if (fg != nfg_m1) begin
            fg <= fg + 8'd1;
            g  <= '0;
            st <= S_IMG_RD;
          end else begin
            n_layers <= n_layers + 1;
            if (lay.last) st <= S_DONE;
            else begin
              pc <= pc + 1'b1;
              st <= S_FETCH;
            end
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // a layer must not read and overwrite the same image words
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IMG_RD) |-> (lay.in_base != lay.out_base));
endmodule
