// tb_precision_adjust: self-checking testbench of the precision-adjustment unit, FX = 3.
//
// Random event streams (valid, overflow, redundancy) are applied. A reference copy of k
// is kept here: +1 on overflow below FX (retry expected), unchanged with saturate on
// overflow at FX, -1 on redundancy without overflow above 0, unchanged otherwise. k,
// the mask (k ones from the MSB), retry, saturate and dec are checked every cycle, and
// each of the four outcomes must occur.
`timescale 1ns/1ps
module tb_precision_adjust;
  localparam int FX = 3;

  logic clk = 0, rst_n = 0;
  logic ev_valid = 0, ev_ovf = 0, ev_red = 0;
  logic [1:0] k;
  logic [FX-1:0] mask;
  logic retry, saturate, dec;
  int checks = 0, failures = 0;
  int n_retry = 0, n_sat = 0, n_dec = 0, n_hold = 0;
  int kref;

  always #5 clk = ~clk;
  precision_adjust #(.FX(FX), .K_INIT(FX)) dut (.*);

  initial begin
    kref = FX;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      bit er, es, ed;
      @(negedge clk);
      ev_valid = 1'($urandom);
      ev_ovf   = ($urandom_range(0, 2) == 0);
      ev_red   = 1'($urandom);
      #1;
      er = ev_valid && ev_ovf && kref < FX;
      es = ev_valid && ev_ovf && kref == FX;
      ed = ev_valid && !ev_ovf && ev_red && kref > 0;
      checks++;
      if (int'(k) != kref || mask != 3'(~(3'b111 >> kref)) || retry != er || saturate != es || dec != ed) begin
        failures++;
        $display("FAIL: k=%0d (ref %0d) mask=%b retry=%b sat=%b dec=%b", k, kref, mask, retry, saturate, dec);
      end
      if (er) begin kref++; n_retry++; end
      else if (ed) begin kref--; n_dec++; end
      else if (es) n_sat++;
      else n_hold++;
    end
    checks++;
    if (n_retry == 0 || n_sat == 0 || n_dec == 0 || n_hold == 0) begin failures++; $display("FAIL: coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
