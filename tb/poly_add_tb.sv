// poly_add_tb: random and corner operands through the modular adder, compared with
// integer arithmetic: y = (a + b) mod Q.
`timescale 1ns/1ps
`include "tb_util.svh"
module poly_add_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  coef_t a, b, y;
  poly_add dut (.a, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      a = coef_t'((n < 16) ? ((n % 4 == 0) ? 0 : Q - (n % 4)) : $urandom_range(0, Q - 1));
      b = coef_t'((n < 16) ? ((n / 4 == 0) ? 0 : Q - (n / 4)) : $urandom_range(0, Q - 1));
      #1;
      `CHECK(int'(y) == (int'(a) + int'(b)) % Q, ("%0d + %0d = %0d", a, b, y))
    end
    `TB_FINISH
  end
endmodule
