// conv3x3_pe -- one output pixel location of the convolution array: nine
// dsfp_mac multipliers (one per tap of a 3x3 kernel), an adder over the nine
// products and an accumulator.
//
// Each enabled cycle the 3x3 neighbourhood of one input channel is multiplied
// by one 3x3 kernel. With clr high the accumulator is loaded with this
// cycle's sum (the first input channel of a new output channel), otherwise
// the sum is added to it, so an output pixel collects all input channels over
// successive cycles. The accumulator is visible one cycle after the last
// enabled cycle. Nine multipliers per pixel location match the published
// count (14 x 14 locations x 9 = 42 x 42 MACs per engine); the accumulator
// width (48 bits, wrapping) is this design's choice.
module conv3x3_pe
  import cnn_dsa_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,     // multiply-accumulate this cycle
  input  logic                     clr,    // start a new sum (with en)
  input  act_t    [TAPS-1:0]       win,    // 3x3 neighbourhood, tap 3*dr+dc
  input  kernel_t                  kern,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [PROD_W-1:0] prod [TAPS];
  logic signed [ACC_W-1:0]  sum;

  for (genvar t = 0; t < TAPS; t++) begin : g_tap
    dsfp_mac u_mac (.act(win[t]), .coef(kern[t]), .prod(prod[t]));
  end

  always_comb begin
    sum = '0;
    for (int t = 0; t < TAPS; t++) sum += ACC_W'(prod[t]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (en)  acc <= clr ? sum : acc + sum;
  end
endmodule
