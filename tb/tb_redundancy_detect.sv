// tb_redundancy_detect: exhaustive self-checking testbench of redundancy_detect at
// <3,9,3>, RED_BITS = 2.
//
// Every combination of the three fixed exponent fields is applied (other bits random).
// A word counts as redundant when its exponent MSB is 1 and the next two bits are 0, or
// the MSB is 0 and the next two bits are 1 (written here as explicit patterns); the
// output must be set exactly when all three words are redundant.
`timescale 1ns/1ps
module tb_redundancy_detect;
  localparam int EB = 3, MB = 9, FX = 3, N = 1 + EB + MB + FX;

  logic [N-1:0] a, b, r;
  logic redundant;
  int checks = 0, failures = 0, n_red = 0;

  redundancy_detect #(.EB(EB), .MB(MB), .FX(FX), .RED_BITS(2)) dut (.*);

  function automatic bit red_ref(input logic [2:0] e);
    return (e == 3'b100) || (e == 3'b011);
  endfunction

  initial begin
    for (int ea = 0; ea < 8; ea++)
      for (int eb = 0; eb < 8; eb++)
        for (int er = 0; er < 8; er++) begin
          a = {1'($urandom), 3'(ea), 12'($urandom)};
          b = {1'($urandom), 3'(eb), 12'($urandom)};
          r = {1'($urandom), 3'(er), 12'($urandom)};
          #1;
          checks++;
          if (redundant !== (red_ref(3'(ea)) && red_ref(3'(eb)) && red_ref(3'(er)))) begin
            failures++;
            $display("FAIL: exponents %b %b %b gave %b", 3'(ea), 3'(eb), 3'(er), redundant);
          end
          if (redundant) n_red++;
        end
    checks++;
    if (n_red != 8) begin failures++; $display("FAIL: %0d redundant cases, expected 8", n_red); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
