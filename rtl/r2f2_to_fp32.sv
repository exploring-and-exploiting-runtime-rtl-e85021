// r2f2_to_fp32: converts an R2F2 word <EB,MB,FX> with k flexible exponent bits back into
// IEEE single precision.
//
// The exponent is reassembled as {fixed exponent, top k flexible bits} and rebiased from
// 2^(EB+k-1)-1 to 127; the fraction is {fixed mantissa, low FX-k flexible bits},
// left-aligned and padded with zeros to 23 bits, so the conversion is exact. An exponent
// of 0 gives a signed zero and the reserved all-ones exponent gives a signed infinity.
// Requires EB+FX <= 8 and MB+FX <= 23. Purely combinational. The paper counts this
// conversion in the multiplier's latency; the encoding of zero and infinity is this
// design's choice.
module r2f2_to_fp32
  import r2f2_pkg::*;
#(
  parameter int unsigned EB = EB_DEF,
  parameter int unsigned MB = MB_DEF,
  parameter int unsigned FX = FX_DEF,
  localparam int unsigned N  = 1 + EB + MB + FX,
  localparam int unsigned KW = $clog2(FX + 1)
) (
  input  logic [N-1:0]  w,
  input  logic [KW-1:0] k,
  output fp32_t         y
);

  localparam int unsigned NF = MB + FX;

  logic [FX-1:0]    mask;
  logic [EB+FX-1:0] xe;
  logic [EB+FX-1:0] e_val;
  logic [NF-1:0]    f_al;
  int               emax;
  int               e32;

  always_comb begin
    mask  = ~({FX{1'b1}} >> k);
    xe    = {w[N-2 -: EB], w[FX-1:0] & mask};
    e_val = xe >> (FX - int'(k));
    f_al  = {w[FX +: MB], (w[FX-1:0] & ~mask) << k};
    emax  = (1 << (int'(EB) + int'(k))) - 1;
    e32   = int'(e_val) - ((1 << (int'(EB) + int'(k) - 1)) - 1) + FP32_BIAS;

    y.sign = w[N-1];
    if (e_val == '0) begin
      y.exp  = 8'd0;
      y.frac = 23'd0;
    end else if (int'(e_val) >= emax) begin
      y.exp  = 8'hFF;
      y.frac = 23'd0;
    end else begin
      y.exp  = e32[7:0];
      y.frac = {f_al, {(23-NF){1'b0}}};
    end
  end

endmodule
