// tb_exp_add: self-checking testbench of exp_add at <EB,FX> = <3,3>.
//
// For random fixed exponents, flexible regions, precisions k and mantissa carries, the
// expected exponent is computed here as an integer, E = E1 + E2 - (2^(EB+k-1)-1) + mc,
// with E1, E2 read from {fixed exponent, top k flexible bits}. The test checks the
// overflow flag (E >= 2^(EB+k)-1), the underflow flag (E <= 0), the result fields when
// neither is set (and that flexible bits outside the mask are zero), and the one-edge
// latency of out_valid.
`timescale 1ns/1ps
module tb_exp_add;
  localparam int EB = 3;
  localparam int FX = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [EB-1:0] ea = 0, eb = 0;
  logic [FX-1:0] fa = 0, fb = 0;
  logic [1:0] k = 0;
  logic mc = 0;
  logic out_valid;
  logic [EB-1:0] e_fix;
  logic [FX-1:0] e_flex;
  logic ovf, udf;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_udf = 0;

  always #5 clk = ~clk;
  exp_add #(.EB(EB), .FX(FX)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      int kk, e1, e2, er, emax, got;
      @(negedge clk);
      kk = $urandom_range(0, FX);
      ea = EB'($urandom); eb = EB'($urandom);
      fa = FX'($urandom); fb = FX'($urandom);
      mc = 1'($urandom);
      k = 2'(kk);
      in_valid = 1;
      e1 = int'(ea) * (1 << kk) + (int'(fa) >> (FX - kk));
      e2 = int'(eb) * (1 << kk) + (int'(fb) >> (FX - kk));
      er = e1 + e2 - ((1 << (EB + kk - 1)) - 1) + int'(mc);
      emax = (1 << (EB + kk)) - 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: out_valid missing"); end
      checks++;
      if (ovf !== (er >= emax) || udf !== (er <= 0)) begin
        failures++;
        $display("FAIL: k=%0d E=%0d ovf=%b udf=%b", kk, er, ovf, udf);
      end
      if (er >= emax) n_ovf++;
      if (er <= 0) n_udf++;
      if (er > 0 && er < emax) begin
        got = int'(e_fix) * (1 << kk) + (int'(e_flex) >> (FX - kk));
        checks++;
        if (got != er || (int'(e_flex) & ((1 << (FX - kk)) - 1)) != 0) begin
          failures++;
          $display("FAIL: k=%0d expected E=%0d got fix=%b flex=%b", kk, er, e_fix, e_flex);
        end
      end
    end
    checks++;
    if (n_ovf == 0 || n_udf == 0) begin failures++; $display("FAIL: flags never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
