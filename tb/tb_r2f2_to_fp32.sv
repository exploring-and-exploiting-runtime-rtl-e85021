// tb_r2f2_to_fp32: self-checking testbench of the R2F2 to single-precision converter at
// <3,9,3>.
//
// Random R2F2 words at every precision k (random sign, biased exponent and fraction) are
// converted; the single-precision result must equal exactly the value the word encodes
// by the format definition. Exponent 0 must give a signed zero and the all-ones
// exponent a signed infinity.
`timescale 1ns/1ps
module tb_r2f2_to_fp32;
  import r2f2_pkg::*;
  import r2f2_tb_pkg::*;

  localparam int EB = 3, MB = 9, FX = 3, N = 1 + EB + MB + FX, NF = MB + FX;

  logic [N-1:0] w;
  logic [1:0] k;
  fp32_t y;
  int checks = 0, failures = 0;

  r2f2_to_fp32 #(.EB(EB), .MB(MB), .FX(FX)) dut (.*);

  initial begin
    for (int it = 0; it < 20000; it++) begin
      int kk, emax, e, s;
      real ref_v, got;
      kk   = $urandom_range(0, FX);
      emax = (1 << (EB + kk)) - 1;
      e    = $urandom_range(0, emax);
      s    = $urandom_range(0, 1);
      w    = N'(encode(s, e, longint'($urandom) & ((64'd1 << (NF - kk)) - 1), EB, MB, FX, kk));
      k    = 2'(kk);
      #1;
      checks++;
      got = fp32_real(y);
      if (e == 0) begin
        if (y[30:0] != 0 || y.sign != 1'(s)) begin failures++; $display("FAIL: zero -> %h", y); end
      end else if (e == emax) begin
        if (y.exp != 8'hFF || y.frac != 0 || y.sign != 1'(s)) begin failures++; $display("FAIL: inf -> %h", y); end
      end else begin
        ref_v = decode(longint'(w), EB, MB, FX, kk);
        if (got != ref_v) begin
          failures++;
          if (failures < 10) $display("FAIL: w=%h k=%0d got %g expected %g", w, kk, got, ref_v);
        end
      end
    end
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
