// tb_r2f2_mul: self-checking testbench of the R2F2 multiplier core at <3,9,3>.
//
// Random pairs of R2F2 words (random sign, exponent, fraction, precision k) are fed
// whenever the core is ready. For each pair the real product of the decoded operands is
// formed here; the test checks the flags against the real exponent range of precision k
// (overflow when the product reaches 2^(2^(EB+k-1)), underflow below 2^(2-2^(EB+k-1)),
// with a margin of one rounding step around the boundaries), and otherwise that the
// decoded result is within 2^-(MB+FX-k) of the real product. Zeros give signed zeros.
// It also checks the latency (FX+3 edges from acceptance to out_valid) and the
// initiation interval FX+1.
`timescale 1ns/1ps
module tb_r2f2_mul;
  import r2f2_tb_pkg::*;

  localparam int EB = 3, MB = 9, FX = 3, N = 1 + EB + MB + FX, NF = MB + FX;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [N-1:0] a = 0, b = 0, r;
  logic [1:0] k = 0;
  logic out_valid, ovf, udf;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_udf = 0, n_ok = 0, n_zero = 0;

  always #5 clk = ~clk;
  r2f2_mul #(.EB(EB), .MB(MB), .FX(FX)) dut (.*);

  typedef struct { real p; int k; int t; int zero; int sign; } item_t;
  item_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int NOPS = 4000;
  int sent = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (sent < NOPS) begin
      int kk, emax, ea, eb2;
      #1;
      kk = $urandom_range(0, FX);
      emax = (1 << (EB + kk)) - 1;
      ea = $urandom_range(1, emax - 1);
      eb2 = $urandom_range(1, emax - 1);
      if ($urandom_range(0, 49) == 0) ea = 0;         // zero operand
      a = N'(encode($urandom_range(0, 1), ea, longint'($urandom) & ((64'd1 << (NF - kk)) - 1), EB, MB, FX, kk));
      b = N'(encode($urandom_range(0, 1), eb2, longint'($urandom) & ((64'd1 << (NF - kk)) - 1), EB, MB, FX, kk));
      k = 2'(kk);
      in_valid = 1;
      @(posedge clk);
      if (in_ready) begin
        item_t it;
        it.p = decode(longint'(a), EB, MB, FX, kk) * decode(longint'(b), EB, MB, FX, kk);
        it.k = kk; it.t = cyc; it.zero = (ea == 0); it.sign = int'(a[N-1] ^ b[N-1]);
        q.push_back(it);
        sent++;
      end
    end
    #1 in_valid = 0;
  end

  int got_n = 0, last_acc = -1;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (last_acc >= 0) begin
        checks++;
        if (cyc - last_acc != FX + 1) begin failures++; $display("FAIL: II %0d", cyc - last_acc); end
      end
      last_acc = cyc;
    end
    if (out_valid) begin
      item_t it;
      real mag, hi, lo, v, tol;
      int bias;
      it = q.pop_front();
      checks++;
      // out_valid rises FX+3 edges after acceptance and is sampled one edge later
      if (cyc - it.t != FX + 4) begin failures++; $display("FAIL: latency %0d", cyc - it.t); end
      bias = (1 << (EB + it.k - 1)) - 1;
      hi  = pow2(bias + 1);                 // 2^(emax-bias): first value that overflows
      lo  = pow2(1 - bias);                 // smallest normal value
      tol = pow2(-(NF - it.k - 1));
      mag = it.p < 0 ? -it.p : it.p;
      checks++;
      if (it.zero) begin
        n_zero++;
        if (ovf || udf || r[N-2:0] != '0 || int'(r[N-1]) != it.sign) begin
          failures++; $display("FAIL: zero operand gave %h", r);
        end
      end else if (mag >= hi * (1.0 + tol)) begin
        n_ovf++;
        if (!ovf) begin failures++; $display("FAIL: missed overflow p=%g k=%0d", it.p, it.k); end
      end else if (mag < lo * (1.0 - tol)) begin
        n_udf++;
        if (!udf) begin failures++; $display("FAIL: missed underflow p=%g k=%0d", it.p, it.k); end
      end else if (mag > hi * (1.0 - tol) || mag < lo * (1.0 + tol)) begin
        checks--;                            // on a boundary: either outcome is right
      end else begin
        n_ok++;
        v = decode(longint'(r), EB, MB, FX, it.k);
        if (ovf || udf || rel_err(v, it.p) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL: k=%0d p=%g got %g (ovf=%b udf=%b)", it.k, it.p, v, ovf, udf);
        end
      end
      got_n++;
      if (got_n == NOPS) begin
        checks++;
        if (n_ovf == 0 || n_udf == 0 || n_zero == 0) begin failures++; $display("FAIL: coverage"); end
        $display("ok=%0d ovf=%0d udf=%0d zero=%0d", n_ok, n_ovf, n_udf, n_zero);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (NOPS * 10 + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
