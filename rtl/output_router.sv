// output_router -- returns read data from the chip to the host: it picks
// the addressed pixel, coefficient or status word and queues it in its
// SRAM, a FIFO that the host interface drains as its output stream.
//
// The input router turns a host read into a one-cycle read enable on the
// addressed buffer; this block registers the read's region, engine and lane
// in the same cycle (rd_valid), selects the datum from the buffer outputs in
// the next cycle and pushes it into the FIFO. Control reads return word 0 =
// {30'b0, busy, done}, word 1 = layers completed, word 2 = conv steps
// completed; descriptor reads return 0. rd_ok tells the host interface that
// there is room for one more read even if the FIFO is not drained; the
// output stream is a valid/ready handshake. The published design shows an
// output router (with an SRAM) below the engine array; the FIFO use of that
// SRAM and its depth of 16 are this design's choices.
module output_router
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned NE    = NE_DEF,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   rd_valid,
  input  bus_req_t               req,
  input  act_t [(M+2)*(M+2)-1:0] img_rdata  [NE],
  input  kernel_t                coef_rdata [NE],
  input  logic                   busy,
  input  logic                   done,
  input  logic [31:0]            n_layers,
  input  logic [31:0]            n_steps,
  output logic                   rd_ok,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [31:0]            out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic        s1_valid;
  region_e     s1_region;
  logic [3:0]  s1_ce;
  logic [15:0] s1_word;
  logic [7:0]  s1_lane;
  logic [31:0] sel;

  logic [31:0]   fifo [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          push, pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_region <= RG_COEF;
      s1_ce     <= '0;
      s1_word   <= '0;
      s1_lane   <= '0;
    end else begin
      s1_valid  <= rd_valid;
      s1_region <= req.region;
      s1_ce     <= req.ce;
      s1_word   <= req.word;
      s1_lane   <= req.lane;
    end
  end

  always_comb begin
    sel = '0;
    unique case (s1_region)
      RG_IMAGE: sel = 32'(img_rdata[s1_ce][s1_lane]);
      RG_COEF:  sel = 32'(coef_rdata[s1_ce][s1_lane[3:0]]);
      RG_CTRL:  sel = (s1_word == 16'd0) ? {30'b0, busy, done} :
                      (s1_word == 16'd1) ? n_layers :
                      (s1_word == 16'd2) ? n_steps : 32'd0;
      default:  sel = '0;
    endcase
  end

  assign push      = s1_valid;
  assign pop       = out_valid && out_ready;
  assign out_valid = (cnt != 0);
  assign out_data  = fifo[rp];
  assign rd_ok     = (32'(cnt) + 32'(s1_valid)) <= DEPTH - 2;

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (cnt < DEPTH || pop));
endmodule
