// cnn_dsa_pkg -- constants, data types and number-format helpers shared by
// the whole CNN domain-specific accelerator.
//
// The accelerator stores every activation in a 9-bit "domain specific
// floating point" (DSFP) word of 5 mantissa bits and 4 exponent bits, and
// every filter coefficient in a 15-bit DSFP word of 1 sign bit, 2 exponent
// bits and 12 mantissa bits. Those widths are the published ones. How the
// fields combine into a number is this design's choice: an activation is the
// unsigned integer m * 2^e, a coefficient is (-1)^s * m * 2^e. Because the
// activation word has no sign, converting a signed sum back to an activation
// clamps negative values to zero: rectification (ReLU) is part of every
// write-back. Conversion truncates (no rounding) and saturates at 31 * 2^15.
//
// Sizes: M = 14 output pixels per side per engine (an (M+2) x (M+2) input
// region), NE = 16 engines in the ring, both as published. The layer
// descriptor layout and the host command word layout are this design's own.
package cnn_dsa_pkg;

  // ---- published sizes -------------------------------------------------
  localparam int unsigned M_DEF   = 14;   // output tile side per engine
  localparam int unsigned NE_DEF  = 16;   // engines in the ring

  // ---- DSFP formats (published widths) --------------------------------
  localparam int unsigned ACT_MANT_W  = 5;
  localparam int unsigned ACT_EXP_W   = 4;
  localparam int unsigned ACT_W       = ACT_MANT_W + ACT_EXP_W;        // 9
  localparam int unsigned COEF_MANT_W = 12;
  localparam int unsigned COEF_EXP_W  = 2;
  localparam int unsigned COEF_W      = 1 + COEF_EXP_W + COEF_MANT_W;  // 15

  // integer value of an activation: 31 << 15 needs 20 bits
  localparam int unsigned ACT_INT_W  = ACT_MANT_W + (1 << ACT_EXP_W) - 1;   // 20
  // |product| < 2^(5+12+15+3) = 2^35, plus sign
  localparam int unsigned PROD_W     = 40;
  // accumulator across 9 taps and up to thousands of input channels
  localparam int unsigned ACC_W      = 48;

  typedef struct packed {
    logic [ACT_EXP_W-1:0]  e;
    logic [ACT_MANT_W-1:0] m;
  } act_t;

  typedef struct packed {
    logic                   s;
    logic [COEF_EXP_W-1:0]  e;
    logic [COEF_MANT_W-1:0] m;
  } coef_t;

  localparam int unsigned TAPS = 9;
  typedef coef_t [TAPS-1:0] kernel_t;     // tap t = 3*dr + dc

  // ---- memory sizes (this design's choice unless noted) ----------------
  // 9 MB of coefficient SRAM (published) split over 16 engines, one
  // 135-bit word (a whole 3x3 kernel) per address:
  // 9*2^20*8 / 16 / 135 = 34952 words per engine.
  localparam int unsigned COEF_WORDS_DEF = 34952;
  localparam int unsigned CADDR_W        = 16;
  localparam int unsigned IMG_WORDS_DEF  = 64;    // regions per engine
  localparam int unsigned IADDR_W        = 8;
  localparam int unsigned INSTR_WORDS    = 64;    // layer descriptors
  localparam int unsigned PC_W           = 6;

  // ---- layer descriptor (this design's own layout, 64 bits) ------------
  typedef struct packed {
    logic [2:0]         rsvd;
    logic               last;       // last layer of the model
    logic [5:0]         out_shift;  // arithmetic right shift before DSFP conversion
    logic               pool;       // 2x2 max pooling after rectification
    logic [4:0]         vsize;      // valid input map side (1..M)
    logic [7:0]         nfg;        // filter groups (output channels / NE)
    logic [7:0]         nig;        // imagery groups (input channels / NE)
    logic [CADDR_W-1:0] coef_base;  // first coefficient word of the layer
    logic [IADDR_W-1:0] out_base;   // first output region word
    logic [IADDR_W-1:0] in_base;    // first input region word
  } layer_t;

  // ---- host command word (this design's own layout) --------------------
  // [31:30] op, [29:28] region, [27:24] engine, [23:8] word, [7:0] lane
  typedef enum logic [1:0] {OP_NOP = 2'd0, OP_WRITE = 2'd1, OP_READ = 2'd2} host_op_e;
  typedef enum logic [1:0] {RG_COEF = 2'd0, RG_IMAGE = 2'd1, RG_INSTR = 2'd2, RG_CTRL = 2'd3} region_e;

  typedef struct packed {
    host_op_e    op;
    region_e     region;
    logic [3:0]  ce;
    logic [15:0] word;
    logic [7:0]  lane;
  } host_cmd_t;

  // one decoded host access, as it travels from the host interface on
  typedef struct packed {
    logic        we;
    region_e     region;
    logic [3:0]  ce;
    logic [15:0] word;
    logic [7:0]  lane;
    logic [31:0] wdata;
  } bus_req_t;

  // ---- conversions ------------------------------------------------------
  function automatic logic [ACT_INT_W-1:0] act_to_int(act_t a);
    return ACT_INT_W'(a.m) << a.e;
  endfunction

  function automatic logic signed [ACC_W-1:0] coef_to_int(coef_t c);
    logic signed [ACC_W-1:0] mag;
    mag = ACC_W'(c.m) << c.e;
    return c.s ? -mag : mag;
  endfunction

  // signed value -> activation: negative clamps to 0, large saturates,
  // otherwise the smallest exponent that fits the mantissa, truncating.
  function automatic act_t int_to_act(logic signed [ACC_W-1:0] v);
    act_t r;
    logic found;
    logic [ACC_W-1:0] u;
    r = '0;
    found = 1'b0;
    u = v;
    if (v <= 0) begin
      r = '0;
    end else if (v > (ACC_W'(31) << 15)) begin
      r = '{e: '1, m: '1};
    end else begin
      for (int e = 0; e < (1 << ACT_EXP_W); e++) begin
        if (!found && ((u >> e) < ACC_W'(32))) begin
          r.e   = ACT_EXP_W'(e);
          r.m   = ACT_MANT_W'(u >> e);
          found = 1'b1;
        end
      end
    end
    return r;
  endfunction

endpackage
