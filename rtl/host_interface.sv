// host_interface -- the chip side of the link to the host processor. The
// host loads coefficients and layer descriptors, sends image data, starts
// the model, waits for completion and reads the results back.
//
// The physical link (USB or eMMC in the published system) is outside this
// block: it sees the stream of 32-bit command words such a bridge would
// deliver, as a valid/ready handshake. A command is a header word
// (host_cmd_t: op, region, engine, word, lane), followed for a write by one
// data word. A write is issued as a bus request in the cycle its data word is
// accepted; a read is issued in the cycle its header is accepted, and its
// answer comes back through the output router's stream. Read headers are
// held off (in_ready low) while the output router has no room (rd_ok low).
// Headers with op NOP are consumed and ignored. irq follows the controller's
// done flag: it rises when a started model has finished. The command format
// is this design's own.
module host_interface
  import cnn_dsa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [31:0] in_data,
  input  logic        rd_ok,
  input  logic        done,
  output logic        irq,
  output logic        req_valid,
  output bus_req_t    req
);
  typedef enum logic {S_HDR, S_DATA} state_e;
  state_e    st;
  host_cmd_t hdr, cur;

  assign cur = host_cmd_t'(in_data);
  assign irq = done;

  always_comb begin
    in_ready  = 1'b0;
    req_valid = 1'b0;
    req       = '0;
    if (st == S_HDR) begin
      in_ready   = (cur.op == OP_READ) ? rd_ok : 1'b1;
      req_valid  = in_valid && (cur.op == OP_READ) && rd_ok;
      req.we     = 1'b0;
      req.region = cur.region;
      req.ce     = cur.ce;
      req.word   = cur.word;
      req.lane   = cur.lane;
    end else begin
      in_ready   = 1'b1;
      req_valid  = in_valid;
      req.we     = 1'b1;
      req.region = hdr.region;
      req.ce     = hdr.ce;
      req.word   = hdr.word;
      req.lane   = hdr.lane;
      req.wdata  = in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= S_HDR;
      hdr <= '0;
    end else if (in_valid && in_ready) begin
      if (st == S_HDR) begin
        hdr <= cur;
        if (cur.op == OP_WRITE) st <= S_DATA;
      end else begin
        st <= S_HDR;
      end
    end
  end
endmodule
