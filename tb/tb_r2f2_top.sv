// tb_r2f2_top: end-to-end self-checking testbench of r2f2_top at its default
// configuration (16-bit R2F2 <3,9,3>, RED_BITS = 2, reset precision k = 3).
//
// Single-precision pairs are drawn in phases that exercise every mechanism of the
// precision-adjustment loop: values near 1 (redundant exponents, k is narrowed), values
// near 10 (the product overflows a narrow exponent, k is widened and the product redone),
// values near 1000 (an operand does not fit and is converted again), very large and very
// small values (saturation to infinity and to zero), and zeros. Each product is compared
// with the real product of the inputs: within 2^-9 relative (two operand roundings, the
// truncated mantissa product and the final rounding at 9 or more fraction bits), or the
// right infinity/zero where the product leaves the widest range 2^-30..2^32. Latency
// without retry must be FX+6 cycles from acceptance to out_valid. Each mechanism is
// counted and must occur at least once.
`timescale 1ns/1ps
module tb_r2f2_top;
  import r2f2_pkg::*;
  import r2f2_tb_pkg::*;

  localparam int FX = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  fp32_t a, b, y;
  logic out_valid, saturated;
  logic [1:0] k;
  logic [FX-1:0] mask;
  logic [31:0] n_inc, n_dec;
  int checks = 0, failures = 0;
  int n_plain = 0, n_prod_retry = 0, n_conv_retry = 0, n_narrow = 0;
  int n_inf = 0, n_zero_sat = 0, n_zero_op = 0;

  always #5 clk = ~clk;
  r2f2_top dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] rand_fp(input int e_lo, input int e_hi);
    return {1'($urandom), 8'(127 + $urandom_range(0, e_hi - e_lo) + e_lo), 23'($urandom)};
  endfunction

  localparam int NOPS = 3000;
  initial begin
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < NOPS; it++) begin
      int phase, t0, lat, inc0, dec0;
      real p, mag, got;
      logic [31:0] ab, bb;
      phase = (it / 50) % 6;
      case (phase)
        0: begin ab = rand_fp(-1, 0);  bb = rand_fp(-1, 0);  end   // near 1
        1: begin ab = rand_fp(3, 3);   bb = rand_fp(3, 3);   end   // near 10
        2: begin ab = rand_fp(9, 10);  bb = rand_fp(-10, -9); end  // near 1000 / 0.001
        3: begin ab = rand_fp(17, 19); bb = rand_fp(15, 17); end   // product beyond 2^32
        4: begin ab = rand_fp(-17, -16); bb = rand_fp(-16, -15); end // product below 2^-30
        default: begin ab = rand_fp(-8, 8); bb = (it % 3 == 0) ? 32'h0 : rand_fp(-8, 8); end
      endcase
      @(negedge clk);
      a = ab; b = bb; in_valid = 1;
      inc0 = int'(n_inc); dec0 = int'(n_dec);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      t0 = cyc;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      lat = cyc - t0;                      // counted in edges, sampled after the edge
      p   = fp32_real(ab) * fp32_real(bb);
      mag = p < 0 ? -p : p;
      got = fp32_real(y);
      checks++;
      if (bb == 32'h0) begin
        n_zero_op++;
        if (y[30:0] != 0) begin failures++; $display("FAIL: x*0 gave %h", y); end
      end else if (mag >= pow2(32) * 1.01) begin
        n_inf++;
        if (!(y.exp == 8'hFF && y.frac == 0 && saturated)) begin failures++; $display("FAIL: expected Inf for %g, got %g", p, got); end
      end else if (mag < pow2(-30) * 0.99) begin
        n_zero_sat++;
        if (!(y[30:0] == 0 && saturated)) begin failures++; $display("FAIL: expected 0 for %g, got %g", p, got); end
      end else if (mag < pow2(31) && mag > pow2(-29)) begin
        if (saturated || rel_err(got, p) > pow2(-9)) begin
          failures++;
          if (failures < 20) $display("FAIL: %g * %g = %g, got %g", fp32_real(ab), fp32_real(bb), p, got);
        end
      end else checks--;
      // classify what the pair went through
      if (int'(n_dec) > dec0) n_narrow++;
      if (int'(n_inc) > inc0) begin
        if (lat > FX + 6 + 2) n_prod_retry++; else n_conv_retry++;
      end else if (!saturated && bb != 0) begin
        n_plain++;
        checks++;
        if (lat != FX + 6) begin failures++; $display("FAIL: latency %0d, expected %0d", lat, FX + 6); end
      end
    end
    $display("plain=%0d product_retry=%0d conversion_retry=%0d narrowed=%0d inf=%0d zero_sat=%0d zero_op=%0d n_inc=%0d n_dec=%0d",
             n_plain, n_prod_retry, n_conv_retry, n_narrow, n_inf, n_zero_sat, n_zero_op, n_inc, n_dec);
    checks++;
    if (n_plain == 0 || n_prod_retry == 0 || n_conv_retry == 0 || n_narrow == 0 ||
        n_inf == 0 || n_zero_sat == 0 || n_zero_op == 0) begin
      failures++; $display("FAIL: a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NOPS * 60 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
