// r2f2_pkg: shared constants and types of the R2F2 flexible floating-point multiplier.
//
// An R2F2 word holds, from MSB to LSB, a sign bit, EB fixed exponent bits, MB fixed
// mantissa bits and FX flexible bits. The leftmost k flexible bits extend the exponent
// (they are its least significant bits), the remaining FX-k bits extend the mantissa
// (they are its least significant bits). The precision is written <EB,MB,FX>.
// The default <3,9,3> is the 16-bit configuration the multiplier is evaluated with.
// The number k is the count of ones in the mask; this design keeps the mask contiguous
// from the MSB of the flexible region and therefore carries k instead of the mask.
package r2f2_pkg;

  // Default precision <EB, MB, FX> (16-bit R2F2 <3,9,3>).
  localparam int unsigned EB_DEF = 3;
  localparam int unsigned MB_DEF = 9;
  localparam int unsigned FX_DEF = 3;

  // Number of bits after the exponent MSB examined for redundancy.
  localparam int unsigned RED_BITS_DEF = 2;

  // IEEE 754 single precision, the format operands arrive in and results leave in.
  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] frac;
  } fp32_t;

  localparam int FP32_BIAS = 127;

endpackage
