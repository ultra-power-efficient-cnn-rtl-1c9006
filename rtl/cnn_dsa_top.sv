// cnn_dsa_top -- the CNN domain-specific accelerator: NE identical CNN
// processing engines joined in a ring, one engine controller, an input
// router with the descriptor SRAM, an output router with its read-back FIFO
// and the host interface.
//
// Operation: the host streams command words in (host_in_*) to load every
// engine's coefficients and input regions and the layer descriptors, then
// writes the start bit. The controller runs the layers, all engines in lock
// step; each layer's input channels rotate round the ring so that every
// engine sees every input channel while computing its own output channels.
// When the last layer is written back, irq rises and the host reads the
// results (host_out_*). The physical USB/eMMC link is not part of this
// RTL: its place is taken by the command-word stream ports. Engine count
// (16), tile size (14) and coefficient SRAM (9 MB) are the published
// numbers; the host command format is this design's own.
module cnn_dsa_top
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M          = M_DEF,
  parameter int unsigned NE         = NE_DEF,
  parameter int unsigned IMG_WORDS  = IMG_WORDS_DEF,
  parameter int unsigned COEF_WORDS = COEF_WORDS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  logic [31:0] host_in_data,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output logic [31:0] host_out_data,
  output logic        irq
);
  localparam int unsigned N = (M + 2) * (M + 2);

  // host side
  logic               req_valid, rd_ok;
  bus_req_t           req;
  logic [NE-1:0]      h_img_en, h_coef_en;
  logic               h_img_we, h_coef_we;
  logic [IADDR_W-1:0] h_img_addr;
  logic [7:0]         h_img_lane;
  act_t               h_img_pix;
  logic [CADDR_W-1:0] h_coef_addr;
  logic [3:0]         h_coef_lane;
  coef_t              h_coef_val;

  // controller
  logic               start, busy, done;
  logic               instr_en;
  logic [PC_W-1:0]    instr_addr;
  layer_t             instr_rdata;
  logic               c_img_en, c_img_we, c_coef_en;
  logic [IADDR_W-1:0] c_img_addr;
  logic [CADDR_W-1:0] c_coef_addr;
  logic               mac_en, acc_clr, pool, ring_load, ring_shift;
  logic [5:0]         out_shift;
  logic [4:0]         vsize;
  logic [31:0]        n_layers, n_steps;

  // engines and ring
  act_t [N-1:0]       img_rdata  [NE];
  act_t [N-1:0]       held       [NE];
  kernel_t            coef_rdata [NE];

  host_interface u_host (
    .clk, .rst_n,
    .in_valid(host_in_valid), .in_ready(host_in_ready), .in_data(host_in_data),
    .rd_ok, .done, .irq, .req_valid, .req
  );

  input_router #(.NE(NE)) u_in (
    .clk, .rst_n, .busy, .req_valid, .req,
    .img_en(h_img_en), .img_we(h_img_we), .img_addr(h_img_addr),
    .img_lane(h_img_lane), .img_pix(h_img_pix),
    .coef_en(h_coef_en), .coef_we(h_coef_we), .coef_addr(h_coef_addr),
    .coef_lane(h_coef_lane), .coef_val(h_coef_val),
    .start, .instr_en, .instr_addr, .instr_rdata
  );

  ce_controller #(.NE(NE)) u_ctl (
    .clk, .rst_n, .start, .busy, .done,
    .instr_en, .instr_addr, .instr_rdata,
    .img_en(c_img_en), .img_we(c_img_we), .img_addr(c_img_addr),
    .coef_en(c_coef_en), .coef_addr(c_coef_addr),
    .mac_en, .acc_clr, .pool, .out_shift, .vsize,
    .ring_load, .ring_shift, .n_layers, .n_steps
  );

  clock_skew_ring #(.M(M), .NE(NE)) u_ring (
    .clk, .load(ring_load), .shift(ring_shift), .own(img_rdata), .held
  );

  for (genvar k = 0; k < NE; k++) begin : g_ce
    cnn_engine #(.M(M), .IMG_WORDS(IMG_WORDS), .COEF_WORDS(COEF_WORDS)) u_ce (
      .clk, .rst_n, .ctl_busy(busy),
      .h_img_en(h_img_en[k]), .h_img_we(h_img_we), .h_img_addr(h_img_addr),
      .h_img_lane(h_img_lane), .h_img_pix(h_img_pix),
      .h_coef_en(h_coef_en[k]), .h_coef_we(h_coef_we), .h_coef_addr(h_coef_addr),
      .h_coef_lane(h_coef_lane), .h_coef_val(h_coef_val),
      .c_img_en, .c_img_we, .c_img_addr, .c_coef_en, .c_coef_addr,
      .mac_en, .acc_clr, .pool, .out_shift, .vsize,
      .win(held[k]), .img_rdata(img_rdata[k]), .coef_rdata(coef_rdata[k])
    );
  end

  output_router #(.M(M), .NE(NE)) u_out (
    .clk, .rst_n,
    .rd_valid(req_valid && !req.we), .req,
    .img_rdata, .coef_rdata, .busy, .done, .n_layers, .n_steps,
    .rd_ok, .out_valid(host_out_valid), .out_ready(host_out_ready),
    .out_data(host_out_data)
  );
endmodule
