// coef_buffer -- the filter coefficient SRAM of one engine (its "second set
// of memory buffers"). One word holds a whole 3x3 kernel of nine 15-bit DSFP
// coefficients, the amount the convolution array consumes per cycle.
//
// Single port, synchronous: with en high and we low the word at addr appears
// on rdata after the next clock edge; with en and we high the taps selected
// by wmask are written (the host loads one coefficient at a time). The
// default depth, 34952 words, divides the published 9 MB of coefficient SRAM
// evenly over the 16 engines; the one-kernel-per-word organisation is this
// design's choice (the published array drawing shows one SRAM per row of
// MACs, which this single memory stands in for).
module coef_buffer
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned WORDS = COEF_WORDS_DEF
) (
  input  logic               clk,
  input  logic               en,
  input  logic               we,
  input  logic [CADDR_W-1:0] addr,
  input  logic [TAPS-1:0]    wmask,
  input  kernel_t            wdata,
  output kernel_t            rdata
);
  kernel_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int t = 0; t < TAPS; t++)
          if (wmask[t]) mem[addr][t] <= wdata[t];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
