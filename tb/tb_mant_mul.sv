// tb_mant_mul: self-checking testbench of mant_mul at <MB,FX> = <9,3>.
//
// Random mantissa pairs and precisions k are fed back to back. The expected result is
// computed here from the definition: the sum of every partial product a_i*b_j of the two
// 1.f significands whose weight 2^-(i+j) is at least 2^-(2MB+FX), normalised to [1,2)
// (mantissa carry when the sum is 2 or more) and rounded half up to MB+FX-k bits. The
// result is also held against the exact product (error below 2^-(MB+FX-k-1)). The test
// checks the latency (FX+1 edges from acceptance to out_valid) and that a new pair is
// taken every FX+1 cycles.
`timescale 1ns/1ps
module tb_mant_mul;
  import r2f2_tb_pkg::*;

  localparam int MB = 9;
  localparam int FX = 3;
  localparam int NF = MB + FX;
  localparam int T  = 2*MB + FX;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [MB-1:0] ma = 0, mb = 0;
  logic [FX-1:0] fa = 0, fb = 0;
  logic [1:0] k = 0;
  logic out_valid, mc, rounding;
  logic [NF-1:0] frac;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  mant_mul #(.MB(MB), .FX(FX)) dut (.*);

  typedef struct { longint unsigned frac; int mc; real exact; int k; int t_acc; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic exp_t model(input logic [MB-1:0] xa, input logic [MB-1:0] xb,
                                 input logic [FX-1:0] ya, input logic [FX-1:0] yb, input int kk);
    exp_t e;
    int abit[NF+1], bbit[NF+1];
    longint unsigned fra, frb, sum, s, f, g;
    int n;
    n   = NF - kk;
    // fraction of mb+fx-k bits: fixed bits, then the low fx-k flexible bits
    fra = (longint'(xa) << (FX - kk)) | (longint'(ya) & ((64'd1 << (FX - kk)) - 1));
    frb = (longint'(xb) << (FX - kk)) | (longint'(yb) & ((64'd1 << (FX - kk)) - 1));
    abit[0] = 1; bbit[0] = 1;
    for (int i = 1; i <= NF; i++) begin
      abit[i] = (i <= n) ? int'((fra >> (n - i)) & 1) : 0;
      bbit[i] = (i <= n) ? int'((frb >> (n - i)) & 1) : 0;
    end
    sum = 0;
    for (int i = 0; i <= NF; i++)
      for (int j = 0; j <= NF; j++)
        if (i + j <= T && abit[i] == 1 && bbit[j] == 1)
          sum += 64'd1 << (T - i - j);
    e.exact = (1.0 + real'(fra) / pow2(n)) * (1.0 + real'(frb) / pow2(n));
    e.mc = (sum >= (64'd2 << T)) ? 1 : 0;
    s = e.mc ? sum : sum * 2;              // now in [2^(T+1), 2^(T+2))
    f = (s >> (T + 1 - n)) & ((64'd1 << n) - 1);
    g = (s >> (T - n)) & 1;
    f = f + g;
    if (f == (64'd1 << n)) begin f = 0; e.mc = 1; end
    e.frac = f << kk;
    e.k = kk;
    return e;
  endfunction

  // driver
  int n_sent = 0;
  localparam int NOPS = 3000;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (n_sent < NOPS) begin
      #1;
      in_valid = 1;
      ma = MB'($urandom); mb = MB'($urandom);
      fa = FX'($urandom); fb = FX'($urandom);
      if (n_sent < 8) begin ma = '1; mb = '1; fa = '1; fb = '1; end  // largest products
      k  = 2'($urandom_range(0, FX));
      @(posedge clk);
      if (in_ready) begin
        exp_t e;
        e = model(ma, mb, fa, fb, int'(k));
        e.t_acc = cyc;
        q.push_back(e);
        n_sent++;
      end
    end
    #1 in_valid = 0;
  end

  // monitor
  int n_got = 0, last_acc = -1;
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (last_acc >= 0) begin
        checks++;
        if (cyc - last_acc != FX + 1) begin
          failures++;
          $display("FAIL: initiation interval %0d, expected %0d", cyc - last_acc, FX + 1);
        end
      end
      last_acc = cyc;
    end
    if (out_valid) begin
      exp_t e;
      real got;
      e = q.pop_front();
      checks++;
      // out_valid rises FX+1 edges after acceptance, so it is sampled at edge FX+2
      if (cyc - e.t_acc != FX + 2) begin
        failures++;
        $display("FAIL: latency %0d, expected %0d", cyc - e.t_acc, FX + 2);
      end
      checks++;
      if (frac !== NF'(e.frac) || mc !== 1'(e.mc)) begin
        failures++;
        if (failures < 10)
          $display("FAIL: k=%0d frac=%h mc=%b expected frac=%h mc=%0d", e.k, frac, mc, e.frac, e.mc);
      end
      got = (1.0 + real'(frac) / pow2(NF)) * (mc ? 2.0 : 1.0);
      checks++;
      if (rel_err(got, e.exact) > pow2(-(NF - e.k - 1))) begin
        failures++;
        $display("FAIL: far from exact product: %f vs %f", got, e.exact);
      end
      n_got++;
      if (n_got == NOPS) begin
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
