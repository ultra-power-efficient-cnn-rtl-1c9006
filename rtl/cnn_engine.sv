// cnn_engine -- one CNN processing engine (CE): a convolution array
// (cnn_processing_block), its imagery buffer and its coefficient buffer.
//
// All engines run in lock step under the one controller, which sends the
// same addresses and strobes to each. Per conv step the engine multiplies
// the region it currently holds in the ring (win) by the kernel on its
// coefficient buffer's read port; at write-back it stores the processed
// result of its accumulators into its own imagery buffer. While the
// controller is idle (ctl_busy low) both buffers belong to the host port,
// which reads and writes one pixel or one coefficient per access; the read
// data of both buffers is also brought out for host read-back, and the image
// read data feeds the ring. Memory reads return one cycle after the request.
// The engine's three parts are as published; the port sharing between host
// and controller is this design's choice.
module cnn_engine
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M          = M_DEF,
  parameter int unsigned IMG_WORDS  = IMG_WORDS_DEF,
  parameter int unsigned COEF_WORDS = COEF_WORDS_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   ctl_busy,
  // host access (one pixel / one coefficient at a time)
  input  logic                   h_img_en,
  input  logic                   h_img_we,
  input  logic [IADDR_W-1:0]     h_img_addr,
  input  logic [7:0]             h_img_lane,
  input  act_t                   h_img_pix,
  input  logic                   h_coef_en,
  input  logic                   h_coef_we,
  input  logic [CADDR_W-1:0]     h_coef_addr,
  input  logic [3:0]             h_coef_lane,
  input  coef_t                  h_coef_val,
  // controller
  input  logic                   c_img_en,
  input  logic                   c_img_we,
  input  logic [IADDR_W-1:0]     c_img_addr,
  input  logic                   c_coef_en,
  input  logic [CADDR_W-1:0]     c_coef_addr,
  input  logic                   mac_en,
  input  logic                   acc_clr,
  input  logic                   pool,
  input  logic [5:0]             out_shift,
  input  logic [4:0]             vsize,
  // ring and read-back
  input  act_t [(M+2)*(M+2)-1:0] win,
  output act_t [(M+2)*(M+2)-1:0] img_rdata,
  output kernel_t                coef_rdata
);
  localparam int unsigned N = (M + 2) * (M + 2);

  act_t [N-1:0]       pb_res;
  logic               img_en, img_we, coef_en, coef_we;
  logic [IADDR_W-1:0] img_addr;
  logic [CADDR_W-1:0] coef_addr;
  logic [N-1:0]       img_wmask;
  act_t [N-1:0]       img_wdata;
  logic [TAPS-1:0]    coef_wmask;
  kernel_t            coef_wdata;

  always_comb begin
    if (ctl_busy) begin
      img_en     = c_img_en;
      img_we     = c_img_we;
      img_addr   = c_img_addr;
      img_wmask  = '1;
      img_wdata  = pb_res;
      coef_en    = c_coef_en;
      coef_we    = 1'b0;
      coef_addr  = c_coef_addr;
    end else begin
      img_en     = h_img_en;
      img_we     = h_img_we;
      img_addr   = h_img_addr;
      img_wmask  = N'(1) << h_img_lane;
      img_wdata  = {N{h_img_pix}};
      coef_en    = h_coef_en;
      coef_we    = h_coef_we;
      coef_addr  = h_coef_addr;
    end
    coef_wmask = TAPS'(1) << h_coef_lane;
    coef_wdata = {TAPS{h_coef_val}};
  end

  image_buffer #(.M(M), .WORDS(IMG_WORDS)) u_img (
    .clk, .en(img_en), .we(img_we), .addr(img_addr),
    .wmask(img_wmask), .wdata(img_wdata), .rdata(img_rdata)
  );

  coef_buffer #(.WORDS(COEF_WORDS)) u_coef (
    .clk, .en(coef_en), .we(coef_we), .addr(coef_addr),
    .wmask(coef_wmask), .wdata(coef_wdata), .rdata(coef_rdata)
  );

  cnn_processing_block #(.M(M)) u_pb (
    .clk, .rst_n, .en(mac_en), .clr(acc_clr),
    .win, .kern(coef_rdata),
    .pool, .out_shift, .vsize,
    .res(pb_res)
  );
endmodule
