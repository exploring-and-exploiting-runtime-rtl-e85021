// tb_r2f2_configs: r2f2_top in each of the seven R2F2 precisions of the resource table:
// 16-bit <3,9,3> <3,8,4> <3,7,5>, 15-bit <3,8,3> <3,7,4>, 14-bit <3,7,3> <3,6,4>.
//
// For every configuration, random single-precision pairs are drawn from the operand
// sweep range 0.0001..10000, twenty pairs in a row from one narrow interval. Each product must be within 2^-(MB-1) relative of the real
// product of the inputs (two operand roundings, the truncated mantissa product and the
// final rounding, all at MB or more fraction bits). The product range 1e-8..1e8 lies
// inside the widest exponent of every configuration, so no product may saturate.
// For the three configurations with FX = 3 the same pairs also go through a model of
// the fixed format of equal width with a 5-bit exponent (E5M10, E5M9, E5M8: operands and
// product rounded to nearest, a product outside the format's range counted as 100%
// error). The mean relative error of R2F2 must be below that of the fixed format; the
// reduction is printed, and so are both mean errors over the pairs whose operands and
// product the fixed format can hold.
`timescale 1ns/1ps
module tb_r2f2_configs;
  import r2f2_pkg::*;
  import r2f2_tb_pkg::*;

  localparam int NCFG = 7;
  localparam int CEB [NCFG] = '{3, 3, 3, 3, 3, 3, 3};
  localparam int CMB [NCFG] = '{9, 8, 7, 8, 7, 7, 6};
  localparam int CFX [NCFG] = '{3, 4, 5, 3, 4, 3, 4};
  localparam int NOPS = 1500;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int done = 0;

  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1; end

  // Operands are drawn interval by interval, as in an accuracy sweep: PER_IV pairs in a
  // row come from [lo, 1.1 lo], with lo log-uniform over 0.0001..10000.
  localparam int PER_IV = 20;
  function automatic real rand_lo();
    return 1.0e-4 * pow2($urandom_range(0, 26)) * (1.0 + real'($urandom_range(0, 1023)) / 1024.0);
  endfunction
  function automatic logic [31:0] rand_op(input real lo);
    real x;
    x = lo * (1.0 + 0.1 * real'($urandom_range(0, 65535)) / 65536.0);
    if (x > 1.0e4) x = 1.0e4;
    if ($urandom_range(0, 1)) x = -x;
    return real_fp32(x);
  endfunction

  // Product in a fixed E5Mm format (bias 15, no subnormals); ovf set when out of range.
  function automatic real round_fixed(input real x, input int m, output bit ovf);
    real mag, sc;
    int  e;
    ovf = 0;
    if (x == 0.0) return 0.0;
    mag = x < 0 ? -x : x;
    e = 0;
    while (mag >= 2.0) begin mag = mag / 2.0; e++; end
    while (mag < 1.0)  begin mag = mag * 2.0; e--; end
    sc  = pow2(m);
    mag = real'(longint'(mag * sc)) / sc;   // the cast rounds to nearest
    if (mag >= 2.0) begin mag = mag / 2.0; e++; end
    if (e > 15 || e < -14) ovf = 1;
    return (x < 0 ? -mag : mag) * pow2(e);
  endfunction

  function automatic real fixed_err(input real x, input real z, input int m);
    bit o1, o2, o3;
    real xr, zr, p;
    xr = round_fixed(x, m, o1);
    zr = round_fixed(z, m, o2);
    p  = round_fixed(xr * zr, m, o3);
    if (o1 || o2 || o3) return 1.0;
    return rel_err(p, x * z);
  endfunction

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int EB = CEB[c], MB = CMB[c], FX = CFX[c];
    localparam int KW = $clog2(FX + 1);
    logic in_valid = 0, in_ready, out_valid, saturated;
    fp32_t a, b, y;
    logic [KW-1:0] k;
    logic [FX-1:0] mask;
    logic [31:0] n_inc, n_dec;

    r2f2_top #(.EB(EB), .MB(MB), .FX(FX), .K_INIT(FX)) dut (.*);

    initial begin
      int bad;
      real err_r2f2, err_fixed, in_r2f2, in_fixed, ef;
      int  n_in;
      real lo;
      bad = 0;
      err_r2f2 = 0.0; err_fixed = 0.0; in_r2f2 = 0.0; in_fixed = 0.0; n_in = 0;
      a = '0; b = '0;
      @(posedge rst_n);
      for (int it = 0; it < NOPS; it++) begin
        real p;
        if (it % PER_IV == 0) lo = rand_lo();
        @(negedge clk);
        a = rand_op(lo); b = rand_op(lo); in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
        while (!out_valid) @(negedge clk);
        p = fp32_real(a) * fp32_real(b);
        err_r2f2  += rel_err(fp32_real(y), p);
        ef = fixed_err(fp32_real(a), fp32_real(b), 1 + EB + MB + FX - 6);
        err_fixed += ef;
        if (ef < 1.0) begin
          n_in++; in_fixed += ef; in_r2f2 += rel_err(fp32_real(y), p);
        end
        checks++;
        if (saturated || rel_err(fp32_real(y), p) > pow2(-(MB - 1))) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL: <%0d,%0d,%0d> %g * %g gave %g", EB, MB, FX,
                                fp32_real(a), fp32_real(b), fp32_real(y));
        end
      end
      $display("<%0d,%0d,%0d>: %0d products, widened %0d, narrowed %0d, mean error %g%% (fixed E5M%0d: %g%%)",
               EB, MB, FX, NOPS, n_inc, n_dec, 100.0 * err_r2f2 / NOPS, 1 + EB + MB + FX - 6,
               100.0 * err_fixed / NOPS);
      if (FX == 3) begin
        checks++;
        if (err_r2f2 >= err_fixed) begin
          failures++;
          $display("FAIL: <%0d,%0d,%0d> not more accurate than E5M%0d", EB, MB, FX, 1 + EB + MB + FX - 6);
        end
        $display("  error reduction against the fixed format: %g%%; over the %0d pairs the fixed format can hold: %g%% against %g%%",
                 100.0 * (1.0 - err_r2f2 / err_fixed), n_in, 100.0 * in_r2f2 / n_in, 100.0 * in_fixed / n_in);
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG);
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
