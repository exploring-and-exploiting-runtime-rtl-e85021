// exp_add: two-cycle masked exponent adder of the R2F2 multiplier, with the overflow /
// underflow detection of the precision-adjustment loop.
//
// The exponent of a word is {fixed exponent (EB bits), top k flexible bits}. The two
// regions are added separately so that no multiplexer has to pick out the k exponent
// bits: the flexible regions are ANDed with the mask and added as they stand, which
// leaves the exponent LSB at flexible bit FX-k. The bias 2^(EB+k-1)-1 is handled as
// "-2^(EB+k-1) + 1": the -1'b1 always lands on the MSB of the fixed exponent region
// whatever k is, and the +1'b1 lands on the exponent LSB together with the mantissa
// carry mc.
//   cycle 1 (registered): fs = e1 + e2 - 2^(EB-1)          (fixed region, signed)
//                         xs = (f1&g) + (f2&g) + ((mc+1) << (FX-k))  (flexible region)
//   cycle 2 (combinational, registered by the caller):
//                         er = fs + carries of xs;  exponent = {er, xs[FX-1:0]}
// ovf is set when er carries past EB bits or the exponent equals the reserved all-ones
// code; udf when er is negative or the exponent is zero.
// Interface: in_valid with the operands; out_valid and the outputs one clock edge later
// (the second cycle's result is combinational from the stage registers).
// The region split, masking and bias handling follow the paper (its Fig. 4(c)); treating
// the all-ones and all-zero exponents as overflow/underflow is this design's choice.
module exp_add
  import r2f2_pkg::*;
#(
  parameter int unsigned EB = EB_DEF,
  parameter int unsigned FX = FX_DEF,
  localparam int unsigned KW = $clog2(FX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [EB-1:0] ea,
  input  logic [EB-1:0] eb,
  input  logic [FX-1:0] fa,
  input  logic [FX-1:0] fb,
  input  logic [KW-1:0] k,
  input  logic          mc,
  output logic          out_valid,
  output logic [EB-1:0] e_fix,
  output logic [FX-1:0] e_flex,
  output logic          ovf,
  output logic          udf
);

  logic [FX-1:0]        mask;
  logic signed [EB+1:0] fs_d, fs_q;
  logic [FX+1:0]        xs_d, xs_q;
  logic [KW-1:0]        k_q;

  // cycle 1
  always_comb begin
    mask = ~({FX{1'b1}} >> k);
    fs_d = $signed({2'b00, ea}) + $signed({2'b00, eb}) - $signed((EB+2)'(1) << (EB-1));
    xs_d = (FX+2)'(fa & mask) + (FX+2)'(fb & mask)
         + ((FX+2)'({1'b0, mc} + 2'd1) << (FX - int'(k)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      fs_q      <= '0;
      xs_q      <= '0;
      k_q       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        fs_q <= fs_d;
        xs_q <= xs_d;
        k_q  <= k;
      end
    end
  end

  // cycle 2
  logic signed [EB+1:0] er;
  logic [FX-1:0]        mask_q;
  logic                 e_ones, e_zero;
  always_comb begin
    mask_q = ~({FX{1'b1}} >> k_q);
    er     = fs_q + $signed({2'b00, xs_q[FX+1:FX]});
    e_fix  = er[EB-1:0];
    e_flex = xs_q[FX-1:0] & mask_q;
    e_ones = (e_fix == {EB{1'b1}}) && ((e_flex | ~mask_q) == {FX{1'b1}});
    e_zero = (e_fix == '0) && (e_flex == '0);
    ovf    = (er[EB+1:EB] == 2'b01) || ((er[EB+1:EB] == 2'b00) && e_ones);
    udf    = er[EB+1] || ((er[EB+1:EB] == 2'b00) && e_zero);
  end

endmodule
