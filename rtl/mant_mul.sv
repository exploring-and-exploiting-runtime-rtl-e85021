// mant_mul: R2F2 mantissa multiplier with bit-serial flexible bits and truncation.
//
// Each operand is 1.M with M = {fixed mantissa (MB bits), flexible mantissa bits}. The
// FX-k flexible bits that belong to the mantissa are taken from the bottom of the
// flexible region and left-aligned, so the fraction is always MB+FX bits with k zeros
// at the end. The MB+1 by MB+1 product of the fixed parts ("res") is formed at once;
// the flexible bits are handled one per cycle into a second accumulator ("res'"): in
// cycle j (1..FX) the j-th flexible bit of each operand multiplies the other operand's
// bits above it, and the two j-th bits multiply each other. Only partial products whose
// weight is at least 2^-(2*MB+FX) are kept (FX extra bits below the fixed product);
// lighter ones are never computed. In cycle FX+1 the sum res<<FX + res' is normalised
// (a product of 2 or more sets the mantissa carry mc, otherwise it is shifted left by
// one), rounded half up to MB+FX-k fraction bits (a rounding overflow also sets mc), and
// registered.
//
// Interface: in_valid/in_ready accept one pair; out_valid is high for one cycle, FX+1
// clock edges after the accepting edge, with frac (left-aligned, MB+FX bits) and mc.
// A new pair is accepted in the rounding cycle, so the initiation interval is FX+1
// (4 for FX=3). rounding is high in that cycle. There is no output back-pressure.
// The bit-serial flexible schedule, the truncation and the normalise/round step follow
// the paper (its Fig. 4(b)); the alignment of the flexible mantissa bits, the rounding
// mode and the handshake are this design's choices.
module mant_mul
  import r2f2_pkg::*;
#(
  parameter int unsigned MB = MB_DEF,
  parameter int unsigned FX = FX_DEF,
  localparam int unsigned KW = $clog2(FX + 1),
  localparam int unsigned NF = MB + FX
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [MB-1:0] ma,
  input  logic [MB-1:0] mb,
  input  logic [FX-1:0] fa,
  input  logic [FX-1:0] fb,
  input  logic [KW-1:0] k,
  output logic          out_valid,
  output logic [NF-1:0] frac,
  output logic          mc,
  output logic          rounding
);

  localparam int unsigned T  = 2*MB + FX;   // weight of the accumulator LSB is 2^-T
  localparam int unsigned JW = $clog2(FX + 2);

  typedef enum logic [1:0] {IDLE, ACC, RND} state_t;

  state_t              state;
  logic [JW-1:0]       j;
  logic [KW-1:0]       k_q;
  logic [NF:0]         a_v, b_v;      // 1.fraction, LSB weight 2^-(MB+FX)
  logic [2*MB+1:0]     res;           // fixed-region product, LSB weight 2^-(2*MB)
  logic [T+1:0]        res_x;         // flexible-bit accumulator, LSB weight 2^-T

  logic [FX-1:0]       mask;
  logic [FX-1:0]       fa_al, fb_al;
  logic                accept;

  assign in_ready = (state == IDLE) || (state == RND);
  assign accept   = in_valid && in_ready;
  assign rounding = (state == RND);

  always_comb begin
    mask  = ~({FX{1'b1}} >> k);
    fa_al = (fa & ~mask) << k;
    fb_al = (fb & ~mask) << k;
  end

  // One cycle of the flexible-bit schedule.
  logic [NF:0]  pre_mask;
  logic         aj, bj, jin;
  logic [T+1:0] term;
  always_comb begin
    pre_mask = ~(((NF+1)'(1) << (FX - int'(j) + 1)) - (NF+1)'(1));   // bits above flexible bit j
    jin      = (int'(j) >= 1) && (int'(j) <= int'(FX));
    aj       = jin && a_v[(FX - int'(j)) % (NF + 1)];
    bj       = jin && b_v[(FX - int'(j)) % (NF + 1)];
    term     = '0;
    if (bj) term = term + ((T+2)'(a_v & pre_mask) >> j);
    if (aj) term = term + ((T+2)'(b_v & pre_mask) >> j);
    if (aj && bj && (2*int'(j) <= int'(FX)))
      term = term + ((T+2)'(1) << (int'(FX) - 2*int'(j)));
  end

  // Normalisation and rounding.
  logic [T+1:0] p, s;
  logic         p_carry;
  logic [NF:0]  f_trunc, f_rnd;
  logic         guard, rnd_ovf;
  int           nfb;
  always_comb begin
    nfb     = int'(NF) - int'(k_q);
    p       = ((T+2)'(res) << FX) + res_x;
    p_carry = p[T+1];
    s       = p_carry ? p : (p << 1);
    f_trunc = (NF+1)'((s >> (int'(T) + 1 - nfb)) & (((T+2)'(1) << nfb) - (T+2)'(1)));
    guard   = s[int'(T) - nfb];
    f_rnd   = f_trunc + (NF+1)'(guard);
    rnd_ovf = f_rnd[nfb];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      j         <= '0;
      k_q       <= '0;
      a_v       <= '0;
      b_v       <= '0;
      res       <= '0;
      res_x     <= '0;
      out_valid <= 1'b0;
      frac      <= '0;
      mc        <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        ACC: begin
          if (int'(j) == 1)
            res <= (2*MB+2)'({1'b1, a_v[NF-1 -: MB]}) * (2*MB+2)'({1'b1, b_v[NF-1 -: MB]});
          res_x <= res_x + term;
          if (int'(j) == int'(FX)) state <= RND;
          j <= j + 1'b1;
        end
        RND: begin
          out_valid <= 1'b1;
          mc        <= p_carry | rnd_ovf;
          frac      <= rnd_ovf ? '0 : (NF'(f_rnd) << k_q);
          state     <= IDLE;
        end
        default: ;
      endcase
      if (accept) begin
        state <= ACC;
        j     <= JW'(1);
        k_q   <= k;
        a_v   <= {1'b1, ma, fa_al};
        b_v   <= {1'b1, mb, fb_al};
        res_x <= '0;
      end
    end
  end

endmodule
