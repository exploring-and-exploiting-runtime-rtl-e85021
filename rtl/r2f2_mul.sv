// r2f2_mul: the R2F2 runtime-reconfigurable floating-point multiplier core.
//
// Multiplies two R2F2 words <EB,MB,FX> that share the precision k (flexible bits given
// to the exponent) and returns the product in the same precision: the sign is the XOR of
// the signs, the mantissa comes from mant_mul (fixed region at once, flexible bits one
// per cycle, truncated) and the exponent from exp_add (two cycles, masked, bias folded
// in), which needs the mantissa carry and so starts after the mantissa. The pieces are
// then assembled into the result register: fixed exponent, fixed mantissa, and a
// flexible region whose top k bits come from the exponent and low FX-k bits from the
// mantissa. ovf/udf report that the exponent did not fit; the result word is then not
// meaningful and the caller is expected to widen the exponent and retry. An operand
// whose exponent is zero is a zero; the product is then a signed zero with no flags.
//
// Timing (FX=3): edge 0 accepts, cycles 1-3 multiply the mantissa, cycle 4 normalises
// and rounds, cycles 5-6 add the exponent, out_valid is high in cycle 7 (FX+3 edges
// after acceptance). A new pair is accepted every FX+1 cycles; in_ready tells when.
// The schedule follows the paper's example (exponent starting in cycle 5); the zero
// encoding and the handshake are this design's choices.
module r2f2_mul
  import r2f2_pkg::*;
#(
  parameter int unsigned EB = EB_DEF,
  parameter int unsigned MB = MB_DEF,
  parameter int unsigned FX = FX_DEF,
  localparam int unsigned N  = 1 + EB + MB + FX,
  localparam int unsigned KW = $clog2(FX + 1),
  localparam int unsigned NF = MB + FX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic [KW-1:0] k,
  output logic          out_valid,
  output logic [N-1:0]  r,
  output logic          ovf,
  output logic          udf
);

  // Operand side data captured on acceptance (held while the mantissa is computed),
  // then copied to the exponent stage when the mantissa finishes.
  typedef struct packed {
    logic          sign;
    logic          zero;
    logic [EB-1:0] ea;
    logic [EB-1:0] eb;
    logic [FX-1:0] fa;
    logic [FX-1:0] fb;
    logic [KW-1:0] k;
  } side_t;

  side_t         side_m, side_e;
  logic          accept;
  logic [FX-1:0] mask;
  logic          a_zero, b_zero;

  always_comb begin
    mask   = ~({FX{1'b1}} >> k);
    a_zero = (a[N-2 -: EB] == '0) && ((a[FX-1:0] & mask) == '0);
    b_zero = (b[N-2 -: EB] == '0) && ((b[FX-1:0] & mask) == '0);
  end

  assign accept = in_valid && in_ready;

  logic          m_valid;
  logic [NF-1:0] m_frac;
  logic          m_mc;
  logic          m_rnd;          // mantissa unit is in its rounding cycle

  mant_mul #(.MB(MB), .FX(FX)) u_mant (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .ma       (a[FX +: MB]),
    .mb       (b[FX +: MB]),
    .fa       (a[FX-1:0]),
    .fb       (b[FX-1:0]),
    .k        (k),
    .out_valid(m_valid),
    .frac     (m_frac),
    .mc       (m_mc),
    .rounding (m_rnd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      side_m <= '0;
      side_e <= '0;
    end else begin
      if (m_rnd)  side_e <= side_m;
      if (accept) side_m <= '{sign: a[N-1] ^ b[N-1], zero: a_zero | b_zero,
                              ea: a[N-2 -: EB], eb: b[N-2 -: EB],
                              fa: a[FX-1:0], fb: b[FX-1:0], k: k};
    end
  end

  logic          e_valid;
  logic [EB-1:0] e_fix;
  logic [FX-1:0] e_flex;
  logic          e_ovf, e_udf;

  exp_add #(.EB(EB), .FX(FX)) u_exp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (m_valid),
    .ea       (side_e.ea),
    .eb       (side_e.eb),
    .fa       (side_e.fa),
    .fb       (side_e.fb),
    .k        (side_e.k),
    .mc       (m_mc),
    .out_valid(e_valid),
    .e_fix    (e_fix),
    .e_flex   (e_flex),
    .ovf      (e_ovf),
    .udf      (e_udf)
  );

  // Assembly into the result register.
  logic [FX-1:0] mask_e;
  logic [FX-1:0] flex_mant;
  assign mask_e    = ~({FX{1'b1}} >> side_e.k);
  assign flex_mant = m_frac[FX-1:0] >> side_e.k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
      ovf       <= 1'b0;
      udf       <= 1'b0;
    end else begin
      out_valid <= e_valid;
      if (e_valid) begin
        if (side_e.zero) begin
          r   <= {side_e.sign, {(N-1){1'b0}}};
          ovf <= 1'b0;
          udf <= 1'b0;
        end else begin
          r   <= {side_e.sign, e_fix, m_frac[NF-1 -: MB], (e_flex & mask_e) | (flex_mant & ~mask_e)};
          ovf <= e_ovf;
          udf <= e_udf;
        end
      end
    end
  end

endmodule
