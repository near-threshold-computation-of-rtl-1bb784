// distance_tb: random clear / column-start / step sequences into the distance block,
// compared with an integer model of d (d = 2d + r per column, d = d - bit per row)
// and of the hit flag (d - bit < 0 during a step).
`timescale 1ns/1ps
`include "tb_util.svh"
module distance_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, col_start = 0, rbit = 0, step = 0, pbit = 0;
  logic signed [8:0] d;
  logic hit;
  always #5 clk = ~clk;

  distance dut (.clk, .rst_n, .clear, .col_start, .rbit, .step, .pbit, .d, .hit);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    int m = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int r;
      r = $urandom_range(0, 9);
      clear = (r == 0) || (m > 100) || (m < 0);
      col_start = !clear && (r <= 3);
      step = !clear && !col_start;
      rbit = 1'($urandom);
      pbit = 1'($urandom);
      #1;
      `CHECK(hit == (step && (m - int'(pbit) < 0)), ("cycle %0d hit=%0b d=%0d", n, hit, m))
      @(negedge clk);
      if (clear) m = 0;
      else if (col_start) m = 2 * m + int'(rbit);
      else if (step) m = m - int'(pbit);
      `CHECK(int'(d) == m, ("cycle %0d d=%0d expected %0d", n, d, m))
    end
    `TB_FINISH
  end
endmodule
