// dsfp_mac -- one multiplier of the MAC array: a 9-bit DSFP activation
// times a 15-bit DSFP coefficient, giving an exact signed integer product.
//
// The 5-bit and 12-bit mantissas are multiplied (17-bit result), the product
// is shifted left by the sum of the two exponents (0..18) and negated when the
// coefficient sign is set. No rounding happens here: the sum of products is
// exact, and the only loss of precision is the final conversion of a finished
// sum back to an activation. Combinational; the accumulating register belongs
// to conv3x3_pe. The published design counts 16 x 42 x 42 of these units; the
// field encoding (value = m * 2^e) is this design's choice.
module dsfp_mac
  import cnn_dsa_pkg::*;
(
  input  act_t                      act,
  input  coef_t                     coef,
  output logic signed [PROD_W-1:0]  prod
);
  logic [ACT_MANT_W+COEF_MANT_W-1:0] mant;
  logic [PROD_W-1:0]                 mag;

  always_comb begin
    mant = ACT_MANT_W'(act.m) * COEF_MANT_W'(coef.m);
    mag  = PROD_W'(mant) << (PROD_W'(act.e) + PROD_W'(coef.e));
    prod = coef.s ? -$signed(mag) : $signed(mag);
  end
endmodule
