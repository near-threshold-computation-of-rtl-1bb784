// kyrom_tb: checks the Knuth-Yao ROM. Reads every word through the module (one clock
// latency) and checks, independently of the table's generator, that
//  - the rows are a probability distribution: sum_row P[row] is 1 within the
//    truncation error (at most 55 units of 2^-90),
//  - row x holds P(|X| = x) of a discrete Gaussian with s = 11.32, compared in real
//    arithmetic to 1e-9,
//  - each word's delta field makes the running column length equal to one more than
//    the highest row holding a one so far.
`timescale 1ns/1ps
`include "tb_util.svh"
module kyrom_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [6:0]  addr = 0;
  logic [60:0] data;
  always #5 clk = ~clk;

  kyrom dut (.clk, .addr, .data);

  logic [60:0] w [90];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    real sig2, pi, rho[55], S, p;
    logic [95:0] tot;
    int colen, hi;
    for (int c = 0; c < 90; c++) begin
      @(negedge clk); addr = 7'(c);
      @(negedge clk);
      w[c] = data;
    end
    // distribution sums to one
    tot = 0;
    for (int c = 0; c < 90; c++) tot += 96'($countones(w[c][54:0])) << (89 - c);
    `CHECK(tot <= (96'd1 << 90) && tot >= (96'd1 << 90) - 96'd55, ("sum of probabilities %h", tot))
    // each row matches the Gaussian density
    pi = 3.14159265358979;
    sig2 = 11.32 * 11.32 / (2.0 * pi);
    S = 0;
    for (int x = -300; x <= 300; x++) S += $exp(-(x * x) / (2.0 * sig2));
    for (int r = 0; r < 55; r++) begin
      p = 0;
      for (int c = 0; c < 90; c++) if (w[c][r]) p += 2.0 ** (-(c + 1));
      rho[r] = $exp(-(r * r) / (2.0 * sig2)) / S * ((r == 0) ? 1.0 : 2.0);
      `CHECK((p - rho[r]) < 1e-9 && (rho[r] - p) < 1e-9, ("row %0d p=%g expected %g", r, p, rho[r]))
    end
    // column lengths
    colen = 0; hi = -1;
    for (int c = 0; c < 90; c++) begin
      for (int r = 0; r < 55; r++) if (w[c][r] && r > hi) hi = r;
      colen += int'(w[c][60:55]);
      `CHECK(colen == hi + 1, ("column %0d length %0d expected %0d", c, colen, hi + 1))
    end
    `TB_FINISH
  end
endmodule
