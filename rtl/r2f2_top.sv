// r2f2_top: single-precision multiplier built on R2F2 with runtime precision adjustment.
//
// Operands arrive as IEEE single precision. Each pair is converted into the R2F2 format
// of the current precision k, multiplied by the R2F2 core, checked, and the product is
// converted back to single precision:
//   - if an operand does not fit (conversion overflow/underflow) or the product's
//     exponent overflows/underflows, the precision-adjustment unit adds one exponent bit
//     (k+1) and the same pair is converted and multiplied again;
//   - if the two operands and the product all carry a redundant exponent bit, k is
//     decremented for the next pair;
//   - with k already at FX an overflow returns a signed infinity and an underflow a
//     signed zero (flag saturated).
// Because the precision used for a pair depends on the outcome of the previous one,
// pairs are processed one at a time: in_ready is high in the idle state only.
//
// Interface: in_valid/in_ready accept {a, b}; out_valid is high for one cycle with y.
// Without a retry a pair takes FX+6 cycles from the accepting edge to out_valid
// (9 for FX=3); each retry adds FX+5 cycles for a product overflow or 1 cycle for an
// operand conversion failure. k, n_inc and n_dec show the current precision and how
// many times it was widened and narrowed; mask is k as the flexible-region mask.
// The adjustment loop follows the paper (its Fig. 5); the serial issue, the handling of
// non-representable operands and the saturation values are this design's choices.
module r2f2_top
  import r2f2_pkg::*;
#(
  parameter int unsigned EB       = EB_DEF,
  parameter int unsigned MB       = MB_DEF,
  parameter int unsigned FX       = FX_DEF,
  parameter int unsigned RED_BITS = RED_BITS_DEF,
  parameter int unsigned K_INIT   = FX_DEF,
  localparam int unsigned N  = 1 + EB + MB + FX,
  localparam int unsigned KW = $clog2(FX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         a,
  input  fp32_t         b,
  output logic          out_valid,
  output fp32_t         y,
  output logic          saturated,
  output logic [KW-1:0] k,
  output logic [FX-1:0] mask,
  output logic [31:0]   n_inc,
  output logic [31:0]   n_dec
);

  typedef enum logic [1:0] {S_IDLE, S_CONV, S_MUL} state_t;

  state_t        state;
  fp32_t         a_q, b_q;
  logic [N-1:0]  wa_q, wb_q;

  // conversion of the held pair at the current precision
  logic [N-1:0]  wa, wb;
  logic          za, ova, uda, zb, ovb, udb;

  fp32_to_r2f2 #(.EB(EB), .MB(MB), .FX(FX)) u_cva (
    .a(a_q), .k(k), .w(wa), .zero(za), .ovf(ova), .udf(uda));
  fp32_to_r2f2 #(.EB(EB), .MB(MB), .FX(FX)) u_cvb (
    .a(b_q), .k(k), .w(wb), .zero(zb), .ovf(ovb), .udf(udb));

  logic conv_bad, conv_inf;
  assign conv_bad = !(za || zb) && (ova || uda || ovb || udb);
  assign conv_inf = ova || ovb;

  // multiplier core
  logic          m_in_ready, m_valid, m_ovf, m_udf;
  logic [N-1:0]  m_r;
  logic          m_start;

  assign m_start = (state == S_CONV) && !conv_bad;

  r2f2_mul #(.EB(EB), .MB(MB), .FX(FX)) u_mul (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (m_start),
    .in_ready (m_in_ready),
    .a        (wa),
    .b        (wb),
    .k        (k),
    .out_valid(m_valid),
    .r        (m_r),
    .ovf      (m_ovf),
    .udf      (m_udf)
  );

  // redundancy check and precision adjustment
  logic red;
  redundancy_detect #(.EB(EB), .MB(MB), .FX(FX), .RED_BITS(RED_BITS)) u_red (
    .a(wa_q), .b(wb_q), .r(m_r), .redundant(red));

  logic          ev_valid, ev_ovf, ev_red;
  logic          retry, saturate, dec;
  always_comb begin
    ev_valid = 1'b0;
    ev_ovf   = 1'b0;
    ev_red   = 1'b0;
    if (state == S_CONV && conv_bad) begin
      ev_valid = 1'b1;
      ev_ovf   = 1'b1;
    end else if (state == S_MUL && m_valid) begin
      ev_valid = 1'b1;
      ev_ovf   = m_ovf || m_udf;
      ev_red   = red;
    end
  end

  precision_adjust #(.FX(FX), .K_INIT(K_INIT)) u_adj (
    .clk(clk), .rst_n(rst_n), .ev_valid(ev_valid), .ev_ovf(ev_ovf), .ev_red(ev_red),
    .k(k), .mask(mask), .retry(retry), .saturate(saturate), .dec(dec));

  // conversion back
  fp32_t y_d;
  r2f2_to_fp32 #(.EB(EB), .MB(MB), .FX(FX)) u_back (.w(m_r), .k(k), .y(y_d));

  assign in_ready = (state == S_IDLE);

  logic sign_p;
  assign sign_p = a_q.sign ^ b_q.sign;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      a_q       <= '0;
      b_q       <= '0;
      wa_q      <= '0;
      wb_q      <= '0;
      out_valid <= 1'b0;
      y         <= '0;
      saturated <= 1'b0;
      n_inc     <= '0;
      n_dec     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (retry) n_inc <= n_inc + 1;
      if (dec)   n_dec <= n_dec + 1;
      case (state)
        S_IDLE: if (in_valid) begin
          a_q   <= a;
          b_q   <= b;
          state <= S_CONV;
        end
        S_CONV: begin
          if (!conv_bad) begin
            wa_q  <= wa;
            wb_q  <= wb;
            state <= S_MUL;
          end else if (saturate) begin
            out_valid <= 1'b1;
            saturated <= 1'b1;
            y         <= conv_inf ? '{sign: sign_p, exp: 8'hFF, frac: '0}
                                  : '{sign: sign_p, exp: 8'h00, frac: '0};
            state     <= S_IDLE;
          end
        end
        S_MUL: if (m_valid) begin
          if (retry) begin
            state <= S_CONV;
          end else begin
            out_valid <= 1'b1;
            saturated <= saturate;
            if (saturate)
              y <= m_ovf ? '{sign: sign_p, exp: 8'hFF, frac: '0}
                         : '{sign: sign_p, exp: 8'h00, frac: '0};
            else
              y <= y_d;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The core is only started when it is idle.
  assert property (@(posedge clk) disable iff (!rst_n) m_start |-> m_in_ready);

endmodule
