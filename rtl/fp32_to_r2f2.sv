// fp32_to_r2f2: converts an IEEE single-precision value into an R2F2 word <EB,MB,FX>
// with k flexible bits given to the exponent.
//
// The exponent is rebiased from 127 to 2^(EB+k-1)-1 and the 23-bit fraction is rounded
// (round half up) to the MB+FX-k fraction bits the format holds; a rounding carry bumps
// the exponent. The exponent's EB upper bits go to the fixed exponent field and its k
// lower bits to the top of the flexible region; the fraction's MB upper bits go to the
// fixed mantissa field and its FX-k lower bits to the bottom of the flexible region.
// Flags: zero (input exponent 0, subnormals are flushed), ovf (exponent would reach the
// reserved all-ones code, or input is Inf/NaN), udf (exponent would be 0 or below). On
// zero, ovf or udf the word is a signed zero.
// Purely combinational. The conversion step itself follows the paper, which counts it in
// the multiplier's latency; rounding mode and flush-to-zero are this design's choices.
module fp32_to_r2f2
  import r2f2_pkg::*;
#(
  parameter int unsigned EB = EB_DEF,
  parameter int unsigned MB = MB_DEF,
  parameter int unsigned FX = FX_DEF,
  localparam int unsigned N  = 1 + EB + MB + FX,
  localparam int unsigned KW = $clog2(FX + 1)
) (
  input  fp32_t          a,
  input  logic [KW-1:0]  k,
  output logic [N-1:0]   w,
  output logic           zero,
  output logic           ovf,
  output logic           udf
);

  localparam int unsigned NF = MB + FX;

  initial begin
    if (NF > 22 || EB + FX > 8 || EB < 1 || FX < 1)
      $error("fp32_to_r2f2: unsupported precision");
  end

  logic [23:0] fr_sh;
  logic        guard;
  logic [24:0] fr_rnd;
  logic        carry;
  logic [22:0] frac_n;
  int          e;
  int          emax;
  int          nfb;
  int          kk;
  logic [31:0] ebits;
  logic [31:0] fixed_exp, flex_exp, fixed_mant, flex_mant, flex;

  always_comb begin
    kk     = int'(k);
    nfb    = int'(NF) - kk;                       // fraction bits in this format
    fr_sh  = {1'b0, a.frac} >> (23 - nfb);
    guard  = a.frac[22 - nfb];
    fr_rnd = {1'b0, fr_sh} + 25'(guard);
    carry  = fr_rnd[nfb];
    frac_n = carry ? 23'd0 : fr_rnd[22:0];
    e      = int'(a.exp) - FP32_BIAS + ((1 << (int'(EB) + kk - 1)) - 1) + int'(carry);
    emax   = (1 << (int'(EB) + kk)) - 1;

    zero = (a.exp == 8'd0);
    ovf  = !zero && ((a.exp == 8'hFF) || (e >= emax));
    udf  = !zero && !ovf && (e <= 0);

    ebits      = 32'(e);
    fixed_exp  = ebits >> kk;
    flex_exp   = ebits & ((32'd1 << kk) - 32'd1);
    fixed_mant = 32'(frac_n) >> (int'(FX) - kk);
    flex_mant  = 32'(frac_n) & ((32'd1 << (int'(FX) - kk)) - 32'd1);
    flex       = (flex_exp << (int'(FX) - kk)) | flex_mant;

    if (zero || ovf || udf)
      w = {a.sign, {(N-1){1'b0}}};
    else
      w = {a.sign, fixed_exp[EB-1:0], fixed_mant[MB-1:0], flex[FX-1:0]};
  end

endmodule
