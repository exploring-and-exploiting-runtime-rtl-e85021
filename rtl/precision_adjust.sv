// precision_adjust: the precision-adjustment unit of R2F2, holding the mask that splits
// the flexible region between exponent and mantissa.
//
// The precision is kept as k, the number of flexible bits given to the exponent (the
// mask is k ones from the MSB of the flexible region). On each reported event
// (ev_valid):
//   - overflow/underflow (ev_ovf) with k < FX: k is incremented and retry is raised, so
//     the current multiplication is redone with the wider exponent;
//   - overflow/underflow with k = FX: nothing can widen the exponent, saturate is raised;
//   - no overflow but redundancy (ev_red) with k > 0: k is decremented for the next
//     multiplication (one bit goes back to the mantissa).
// retry, saturate, inc and dec are combinational in the event cycle; k changes at the
// next edge. Reset loads K_INIT.
// The two rules follow the paper (its Fig. 5); the reset value and the encoding of the
// mask by k are this design's choices.
module precision_adjust
  import r2f2_pkg::*;
#(
  parameter int unsigned FX     = FX_DEF,
  parameter int unsigned K_INIT = FX_DEF,
  localparam int unsigned KW = $clog2(FX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ev_valid,
  input  logic          ev_ovf,
  input  logic          ev_red,
  output logic [KW-1:0] k,
  output logic [FX-1:0] mask,
  output logic          retry,
  output logic          saturate,
  output logic          dec
);

  assign mask     = ~({FX{1'b1}} >> k);
  assign retry    = ev_valid && ev_ovf && (int'(k) < int'(FX));
  assign saturate = ev_valid && ev_ovf && (int'(k) == int'(FX));
  assign dec      = ev_valid && !ev_ovf && ev_red && (k != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     k <= KW'(K_INIT);
    else if (retry) k <= k + 1'b1;
    else if (dec)   k <= k - 1'b1;
  end

endmodule
