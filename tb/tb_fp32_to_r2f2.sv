// tb_fp32_to_r2f2: self-checking testbench of the single-precision to R2F2 converter at
// <3,9,3>.
//
// Random single-precision values spread over 2^-20..2^20 (plus zeros and Inf) are
// converted at every precision k. The expected flags come from the real range of
// precision k (largest finite value just below 2^(2^(EB+k-1)), smallest normal
// 2^(2-2^(EB+k-1))); in range, the decoded word must be within half a unit in the last
// place (2^-(MB+FX-k+1), relative) of the input. A few exact encodings are also checked.
`timescale 1ns/1ps
module tb_fp32_to_r2f2;
  import r2f2_pkg::*;
  import r2f2_tb_pkg::*;

  localparam int EB = 3, MB = 9, FX = 3, N = 1 + EB + MB + FX, NF = MB + FX;

  fp32_t a;
  logic [1:0] k;
  logic [N-1:0] w;
  logic zero, ovf, udf;
  int checks = 0, failures = 0, n_ovf = 0, n_udf = 0, n_ok = 0;

  fp32_to_r2f2 #(.EB(EB), .MB(MB), .FX(FX)) dut (.*);

  task automatic exact(input logic [31:0] x, input int kk, input logic [N-1:0] expw);
    a = x; k = 2'(kk); #1;
    checks++;
    if (w !== expw) begin failures++; $display("FAIL: %h k=%0d gave %h, expected %h", x, kk, w, expw); end
  endtask

  initial begin
    // 1.0: biased exponent 3 (k=0) -> 0 011 000000000 000
    exact(32'h3F800000, 0, 16'h3000);
    // 1.0 at k=1: exponent 0111, top three bits 011 fixed, 1 in the flexible MSB
    exact(32'h3F800000, 1, 16'h3004);
    // -1.5 at k=3: exponent 011111 -> fixed 011, flexible 111; fraction 1 000000000
    exact(32'hBFC00000, 3, 16'hB000 | 16'h0007 | (16'h1 << 11));
    exact(32'h00000000, 2, 16'h0000);
    for (int it = 0; it < 20000; it++) begin
      int kk, bias, e;
      real x, mag, hi, lo, half;
      logic [31:0] bits;
      kk   = $urandom_range(0, FX);
      e    = $urandom_range(0, 40) - 20;
      bits = {1'($urandom), 8'(127 + e), 23'($urandom)};
      if (it % 500 == 0) bits = 32'h7F800000;
      a = bits; k = 2'(kk); #1;
      x    = fp32_real(bits);
      mag  = x < 0 ? -x : x;
      bias = (1 << (EB + kk - 1)) - 1;
      hi   = pow2(bias + 1) * (1.0 - pow2(-(NF - kk + 1)));   // rounds up to 2^(bias+1)
      lo   = pow2(1 - bias);
      half = pow2(-(NF - kk + 1));
      checks++;
      if (bits[30:23] == 8'hFF || mag >= hi) begin
        n_ovf++;
        if (!ovf) begin failures++; $display("FAIL: missed overflow %g k=%0d", x, kk); end
      end else if (mag < lo * (1.0 - half)) begin
        n_udf++;
        if (!udf) begin failures++; $display("FAIL: missed underflow %g k=%0d", x, kk); end
      end else if (mag >= lo) begin
        n_ok++;
        if (ovf || udf || zero || rel_err(decode(longint'(w), EB, MB, FX, kk), x) > half) begin
          failures++;
          if (failures < 10) $display("FAIL: %g k=%0d -> %g", x, kk, decode(longint'(w), EB, MB, FX, kk));
        end
      end else checks--;
    end
    checks++;
    if (n_ovf == 0 || n_udf == 0 || n_ok == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
