// tablenet_pkg: types and constants shared by the LUT-based inference blocks.
//
// binary16 (IEEE 754 half precision) is the activation format between the
// hidden layers: 1 sign bit, 5 exponent bits (bias 15) and 10 stored fraction
// bits. With the implicit leading bit the significand has 11 bits, and each of
// these 11 bits is one bitplane that indexes a layer's LUTs.
package tablenet_pkg;

  localparam int unsigned FP16_EXP_W  = 5;
  localparam int unsigned FP16_FRAC_W = 10;
  localparam int unsigned FP16_MANT_W = FP16_FRAC_W + 1;  // with implicit bit
  localparam int signed   FP16_BIAS   = 15;
  localparam logic [15:0] FP16_MAX    = 16'h7BFF;          // largest finite

  typedef struct packed {
    logic                   sign;
    logic [FP16_EXP_W-1:0]  exp;
    logic [FP16_FRAC_W-1:0] frac;
  } fp16_t;

  // 11-bit significand of a binary16 number: implicit bit is 1 unless the
  // number is zero or subnormal (exponent field 0).
  function automatic logic [FP16_MANT_W-1:0] fp16_mant(fp16_t v);
    return {(v.exp != '0), v.frac};
  endfunction

  // Rounding applied when a layer output is converted to binary16.
  typedef enum logic {
    RND_TRUNC = 1'b0,   // drop the bits below the significand
    RND_STOCH = 1'b1    // stochastic rounding through the rounding LUT
  } rnd_mode_e;

endpackage
