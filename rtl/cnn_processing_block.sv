// cnn_processing_block -- the convolution array of one engine: 3x3
// convolution at all M x M pixel locations at once, then rectification,
// optional 2x2 max pooling and conversion back to DSFP activations.
//
// Input is an (M+2) x (M+2) region of one input channel (row-major, index
// r*(M+2)+c) whose one-pixel border holds the neighbours of the M x M
// interior; output pixel (r,c) uses region pixels (r..r+2, c..c+2) with tap
// 3*dr+dc (correlation, no kernel flip). One enabled cycle handles one input
// channel against one kernel; the M*M accumulators (conv3x3_pe) sum input
// channels over cycles. The result port is combinational from the
// accumulators and has the same padded region layout, so the engine can
// write it straight back to its image buffer: the interior holds the new
// channel, the border and every pixel beyond the valid map side are zero,
// which gives the next layer its zero padding.
//
// Post-processing per pixel: arithmetic right shift by out_shift, 2x2 max
// pooling when pool is set (output side vsize/2, placed at the top-left of
// the interior), conversion to DSFP, which clamps negatives to zero
// (rectification). The published parts are M = 14, the simultaneous MxM 3x3
// convolutions, rectification and 2x2 pooling; the shift, the region layout
// and the valid-size masking are this design's choices. The border pixels
// of res are constant zero by construction (that is the padding), so a
// synthesis tool reports them as idle outputs.
module cnn_processing_block
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M = M_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   clr,
  input  act_t [(M+2)*(M+2)-1:0] win,
  input  kernel_t                kern,
  input  logic                   pool,
  input  logic [5:0]             out_shift,
  input  logic [4:0]             vsize,
  output act_t [(M+2)*(M+2)-1:0] res
);
  localparam int unsigned R = M + 2;
  localparam int unsigned H = M / 2;

  logic signed [ACC_W-1:0] acc [M][M];
  logic signed [ACC_W-1:0] shf [M][M];

  for (genvar r = 0; r < M; r++) begin : g_row
    for (genvar c = 0; c < M; c++) begin : g_col
      act_t [TAPS-1:0] nb;
      for (genvar dr = 0; dr < 3; dr++) begin : g_dr
        for (genvar dc = 0; dc < 3; dc++) begin : g_dc
          assign nb[3*dr+dc] = win[(r+dr)*R + (c+dc)];
        end
      end
      conv3x3_pe u_pe (
        .clk, .rst_n, .en, .clr,
        .win (nb),
        .kern,
        .acc (acc[r][c])
      );
      assign shf[r][c] = acc[r][c] >>> out_shift;
    end
  end

  always_comb begin
    logic signed [ACC_W-1:0] m01, m23;
    m01 = '0;
    m23 = '0;
    res = '0;
    if (pool) begin
      for (int i = 0; i < H; i++) begin
        for (int j = 0; j < H; j++) begin
          m01 = (shf[2*i][2*j]   > shf[2*i][2*j+1])   ? shf[2*i][2*j]   : shf[2*i][2*j+1];
          m23 = (shf[2*i+1][2*j] > shf[2*i+1][2*j+1]) ? shf[2*i+1][2*j] : shf[2*i+1][2*j+1];
          if ((5'(i) < (vsize >> 1)) && (5'(j) < (vsize >> 1)))
            res[(i+1)*R + (j+1)] = int_to_act((m01 > m23) ? m01 : m23);
        end
      end
    end else begin
      for (int r = 0; r < M; r++) begin
        for (int c = 0; c < M; c++) begin
          if ((5'(r) < vsize) && (5'(c) < vsize))
            res[(r+1)*R + (c+1)] = int_to_act(shf[r][c]);
        end
      end
    end
  end
endmodule
