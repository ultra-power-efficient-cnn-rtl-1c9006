// image_buffer -- the imagery memory of one engine (its "first set of
// memory buffers"). Each word holds one channel as a full (M+2) x (M+2)
// region of DSFP activations, so the ring can be loaded with a whole
// channel in one read.
//
// Single port, synchronous: with en high and we low the word at addr appears
// on rdata after the next clock edge and stays there until the next read;
// with en and we high the pixels selected by wmask are written. A host
// access writes one pixel (one-hot mask), an engine write-back writes the
// whole word. The published design names these buffers but gives no size or
// organisation; the word layout and the depth of 64 regions are this design's
// choices.
module image_buffer
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned WORDS = IMG_WORDS_DEF
) (
  input  logic                   clk,
  input  logic                   en,
  input  logic                   we,
  input  logic [IADDR_W-1:0]     addr,
  input  logic [(M+2)*(M+2)-1:0] wmask,
  input  act_t [(M+2)*(M+2)-1:0] wdata,
  output act_t [(M+2)*(M+2)-1:0] rdata
);
  localparam int unsigned N = (M + 2) * (M + 2);

  act_t [N-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int i = 0; i < N; i++)
          if (wmask[i]) mem[addr][i] <= wdata[i];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
