// poly_mul_tb: random and corner operands (0, 1, Q-1) through the modular multiplier
// and butterfly; results compared with 64-bit integer arithmetic.
`timescale 1ns/1ps
`include "tb_util.svh"
module poly_mul_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  coef_t u, v, w, prod, sum, diff;
  poly_mul dut (.u, .v, .w, .prod, .sum, .diff);

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    longint p, s, d;
    int corner [4] = '{0, 1, Q - 1, Q / 2};
    for (int n = 0; n < 20000; n++) begin
      if (n < 64) begin
        u = coef_t'(corner[n % 4]); v = coef_t'(corner[(n / 4) % 4]); w = coef_t'(corner[(n / 16) % 4]);
      end else begin
        u = coef_t'($urandom_range(0, Q - 1)); v = coef_t'($urandom_range(0, Q - 1));
        w = coef_t'($urandom_range(0, Q - 1));
      end
      #1;
      p = (longint'(w) * longint'(v)) % Q;
      s = (longint'(u) + p) % Q;
      d = (longint'(u) - p + Q) % Q;
      `CHECK(longint'(prod) == p && longint'(sum) == s && longint'(diff) == d,
             ("u=%0d v=%0d w=%0d: %0d %0d %0d expected %0d %0d %0d", u, v, w, prod, sum, diff, p, s, d))
    end
    `TB_FINISH
  end
endmodule
