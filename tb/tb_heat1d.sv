// tb_heat1d: 1D heat equation solved with every multiplication done by r2f2_top at its
// default configuration (16-bit R2F2 <3,9,3>).
//
// Explicit finite differences on NX points with fixed zero boundaries:
//   t = 2 * u[i]          (R2F2)
//   d = R * (u[i-1] + u[i+1] - t)   (the product by R2F2, the sums in single precision)
//   u'[i] = u[i] + d      (single precision)
// from u = AMP * sin(pi x). Each of the two multiplications has its own r2f2_top, and
// so its own precision register, as each multiplication in a loop body would have its
// own multiplier in hardware. With NX = 64, R = 0.25 and 12000 steps the run makes about
// 1.5 million multiplications and the field decays from 500 to below 1, so the operand
// range shrinks as the simulation proceeds. The same scheme is run here in double
// precision; the test requires the R2F2 field to stay within 2% of the reference
// maximum at every checkpoint, and reports how often the precision was widened
// (overflow) and narrowed (redundancy). Each product is also checked against the real
// product of its operands (2^-9 relative).
`timescale 1ns/1ps
module tb_heat1d;
  import r2f2_pkg::*;
  import r2f2_tb_pkg::*;

  localparam int  NX    = 64;
  localparam int  STEPS = 12000;
  localparam real R     = 0.25;
  localparam real AMP   = 500.0;
  localparam real PI    = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic  in_valid [2];
  logic  in_ready [2];
  fp32_t a [2], b [2], y [2];
  logic  out_valid [2], saturated [2];
  logic [1:0]  k [2];
  logic [2:0]  mask [2];
  logic [31:0] n_inc [2], n_dec [2];
  int checks = 0, failures = 0;
  longint n_mul = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < 2; g++) begin : g_mul
    r2f2_top dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid[g]), .in_ready(in_ready[g]),
      .a(a[g]), .b(b[g]), .out_valid(out_valid[g]), .y(y[g]), .saturated(saturated[g]),
      .k(k[g]), .mask(mask[g]), .n_inc(n_inc[g]), .n_dec(n_dec[g]));
  end

  task automatic mul(input int u_i, input logic [31:0] x, input logic [31:0] z,
                     output logic [31:0] p);
    real ref_p;
    @(negedge clk);
    a[u_i] = x; b[u_i] = z; in_valid[u_i] = 1;
    @(posedge clk);
    while (!in_ready[u_i]) @(posedge clk);
    @(negedge clk);
    in_valid[u_i] = 0;
    while (!out_valid[u_i]) @(negedge clk);
    p = y[u_i];
    n_mul++;
    ref_p = fp32_real(x) * fp32_real(z);
    checks++;
    if (ref_p != 0.0 && rel_err(fp32_real(p), ref_p) > pow2(-9)) begin
      failures++;
      if (failures < 10) $display("FAIL: %g * %g gave %g", fp32_real(x), fp32_real(z), fp32_real(p));
    end
  endtask

  logic [31:0] u [NX], un [NX];
  real         ur[NX], urn[NX];
  logic [31:0] r_bits, two_bits;

  initial begin
    real maxref, maxerr, e;
    for (int g = 0; g < 2; g++) begin a[g] = '0; b[g] = '0; in_valid[g] = 0; end
    r_bits = real_fp32(R);
    two_bits = real_fp32(2.0);
    for (int i = 0; i < NX; i++) begin
      ur[i] = (i == 0 || i == NX-1) ? 0.0 : AMP * $sin(PI * real'(i) / real'(NX-1));
      u[i]  = real_fp32(ur[i]);
      ur[i] = fp32_real(u[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < STEPS; s++) begin
      un[0] = 32'h0; un[NX-1] = 32'h0; urn[0] = 0.0; urn[NX-1] = 0.0;
      for (int i = 1; i < NX-1; i++) begin
        logic [31:0] t, lap, d;
        mul(0, two_bits, u[i], t);
        lap = real_fp32(fp32_real(u[i-1]) + fp32_real(u[i+1]) - fp32_real(t));
        mul(1, r_bits, lap, d);
        un[i]  = real_fp32(fp32_real(u[i]) + fp32_real(d));
        urn[i] = ur[i] + R * (ur[i-1] + ur[i+1] - 2.0 * ur[i]);
      end
      u = un;
      ur = urn;
      if ((s + 1) % (STEPS / 4) == 0) begin
        maxref = 0.0; maxerr = 0.0;
        for (int i = 0; i < NX; i++) begin
          e = fp32_real(u[i]) - ur[i];
          if (e < 0) e = -e;
          if (e > maxerr) maxerr = e;
          if (ur[i] > maxref) maxref = ur[i];
        end
        checks++;
        if (maxerr > 0.02 * maxref) begin
          failures++;
          $display("FAIL: step %0d error %g against maximum %g", s + 1, maxerr, maxref);
        end
        $display("step %0d: max %g, max error %g, k = %0d / %0d", s + 1, maxref, maxerr, k[0], k[1]);
      end
    end
    $display("multiplications %0d, precision widened %0d times, narrowed %0d times",
             n_mul, n_inc[0] + n_inc[1], n_dec[0] + n_dec[1]);
    checks++;
    if (n_dec[0] + n_dec[1] == 0) begin failures++; $display("FAIL: the precision was never narrowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (STEPS * NX * 2 * 30) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
