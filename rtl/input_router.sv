// input_router -- routes host accesses from the host interface into the
// chip, and holds the model's layer descriptors in its SRAM.
//
// A request (req_valid with a bus_req_t) addresses one of four regions:
// coefficient or image memory of one engine (engine number, word, lane =
// tap or pixel), the descriptor SRAM (word = descriptor, lane 0/1 = low/high
// 32 bits) or the control registers (a write to word 0 with bit 0 set starts
// the model). Image and coefficient accesses become a one-cycle enable on
// the selected engine's host port, reads included: the read data appears on
// that engine's buffer outputs in the next cycle, where the output router
// picks it up. Writes into the engines while the controller is busy are
// dropped (the buffers belong to the controller then), and the start pulse
// is ignored while busy. The descriptor SRAM is 1W1R: host writes, the
// controller reads with one cycle latency. The published design shows an
// input router with an SRAM next to the engine array; what it routes and
// what its SRAM holds are this design's reading. The address, lane and data
// outputs are the request's own fields broadcast to every engine (only the
// enables are decoded), so they are plain wires from the inputs.
module input_router
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned NE = NE_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               busy,
  input  logic               req_valid,
  input  bus_req_t           req,
  // to every engine's host port (address/data broadcast, enable per engine)
  output logic [NE-1:0]      img_en,
  output logic               img_we,
  output logic [IADDR_W-1:0] img_addr,
  output logic [7:0]         img_lane,
  output act_t               img_pix,
  output logic [NE-1:0]      coef_en,
  output logic               coef_we,
  output logic [CADDR_W-1:0] coef_addr,
  output logic [3:0]         coef_lane,
  output coef_t              coef_val,
  // controller
  output logic               start,
  input  logic               instr_en,
  input  logic [PC_W-1:0]    instr_addr,
  output layer_t             instr_rdata
);
  logic [31:0] instr_lo [INSTR_WORDS];
  logic [31:0] instr_hi [INSTR_WORDS];
  logic        hit;

  assign hit = req_valid && !(busy && req.we);

  always_comb begin
    img_en    = '0;
    coef_en   = '0;
    if (hit && req.region == RG_IMAGE) img_en[req.ce]  = 1'b1;
    if (hit && req.region == RG_COEF)  coef_en[req.ce] = 1'b1;
    img_we    = req.we;
    img_addr  = IADDR_W'(req.word);
    img_lane  = req.lane;
    img_pix   = act_t'(req.wdata[ACT_W-1:0]);
    coef_we   = req.we;
    coef_addr = CADDR_W'(req.word);
    coef_lane = req.lane[3:0];
    coef_val  = coef_t'(req.wdata[COEF_W-1:0]);
    start     = req_valid && req.we && !busy && (req.region == RG_CTRL) &&
                (req.word == '0) && req.wdata[0];
  end

  always_ff @(posedge clk) begin
    if (req_valid && req.we && req.region == RG_INSTR) begin
      if (req.lane[0]) instr_hi[PC_W'(req.word)] <= req.wdata;
      else             instr_lo[PC_W'(req.word)] <= req.wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        instr_rdata <= '0;
    else if (instr_en) instr_rdata <= layer_t'({instr_hi[instr_addr], instr_lo[instr_addr]});
  end
endmodule
