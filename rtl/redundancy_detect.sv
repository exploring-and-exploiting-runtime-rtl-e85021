// redundancy_detect: detects a redundant exponent bit in the operands and result of an
// R2F2 multiplication.
//
// A biased exponent whose MSB is 1 (value >= 1) followed by zeros, or whose MSB is 0
// (value < 1) followed by ones, can drop the bit after the MSB without changing its
// value (e.g. 8-bit 10000111 and 5-bit 10111 both stand for 2^8). A word is flagged when
// the RED_BITS bits after its exponent MSB all equal the inverse of the MSB; the MSB and
// these bits always lie in the fixed exponent region, so k does not matter. The output
// is set when the two operands and the result are all redundant, telling the
// precision-adjustment unit to give one exponent bit back to the mantissa for the next
// multiplication. Combinational. The rule and RED_BITS = 2 follow the paper; requiring
// all three words to agree is this design's reading of "in the operands and result".
module redundancy_detect
  import r2f2_pkg::*;
#(
  parameter int unsigned EB       = EB_DEF,
  parameter int unsigned MB       = MB_DEF,
  parameter int unsigned FX       = FX_DEF,
  parameter int unsigned RED_BITS = RED_BITS_DEF,
  localparam int unsigned N = 1 + EB + MB + FX
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic [N-1:0] r,
  output logic         redundant
);

  initial begin
    if (RED_BITS + 1 > EB) $error("redundancy_detect: RED_BITS must be below EB");
  end

  function automatic logic word_redundant(input logic [N-1:0] w);
    logic [EB-1:0] e;
    logic          red;
    e   = w[N-2 -: EB];
    red = 1'b1;
    for (int i = 1; i <= int'(RED_BITS); i++)
      if (e[EB-1-i] == e[EB-1]) red = 1'b0;
    return red;
  endfunction

  assign redundant = word_redundant(a) && word_redundant(b) && word_redundant(r);

endmodule
