// error_ctrl_tb: the error control unit with its default (K-Means) calibration.
// After reset the five settings must equal VP_k = 950 + CP_k * 100 / sum(CP) mV with
// CP_k the mean critical path of partition k (computed here in real arithmetic from
// the table of critical paths, within 1 mV), and must lie within 10 mV of the values
// quoted for K-Means (0.96, 1.00, 0.97, 0.98, 0.95 V). Random error vectors must then
// raise each flagged partition by 10 mV per clock up to 1050 mV, with boost pulses.
`timescale 1ns/1ps
`include "tb_util.svh"
module error_ctrl_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] err = 0, boost;
  logic [10:0] vccint_mv [5];
  logic [15:0] err_count;
  always #5 clk = ~clk;

  error_ctrl dut (.clk, .rst_n, .err, .vccint_mv, .boost, .err_count);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    real cp [14] = '{2.217, 2.217, 1.9, 1.9, 2.394, 2.101, 8.603, 3.332, 3.654, 5.327, 1.17,
                     1.725, 1.323, 1.412};
    int  pt [14] = '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 4, 4, 4, 4};
    int  paper [5] = '{960, 1000, 970, 980, 950};
    real s [5], c [5], cpk [5], tot, vr;
    int  v [5], cnt;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5; k++) begin s[k] = 0; c[k] = 0; end
    for (int i = 0; i < 14; i++) begin s[pt[i]] += cp[i]; c[pt[i]] += 1; end
    tot = 0;
    for (int k = 0; k < 5; k++) begin cpk[k] = s[k] / c[k]; tot += cpk[k]; end
    vr = 100.0 / tot;
    for (int k = 0; k < 5; k++) begin
      real e;
      e = 950.0 + cpk[k] * vr;
      v[k] = int'(vccint_mv[k]);
      `CHECK(v[k] - e < 1.0 && e - v[k] < 1.0, ("partition %0d: %0d mV expected %f", k, v[k], e))
      `CHECK(v[k] - paper[k] <= 10 && paper[k] - v[k] <= 10, ("partition %0d: %0d mV vs paper %0d", k, v[k], paper[k]))
    end
    cnt = 0;
    for (int n = 0; n < 200; n++) begin
      err = 5'($urandom) & 5'($urandom);
      @(negedge clk);
      for (int k = 0; k < 5; k++) begin
        logic bexp;
        bexp = err[k] && v[k] < 1050;
        if (err[k]) begin cnt++; v[k] = (v[k] + 10 > 1050) ? 1050 : v[k] + 10; end
        `CHECK(int'(vccint_mv[k]) == v[k], ("cycle %0d partition %0d: %0d expected %0d", n, k, vccint_mv[k], v[k]))
        `CHECK(boost[k] == bexp, ("cycle %0d partition %0d boost", n, k))
      end
      `CHECK(int'(err_count) == cnt, ("err_count %0d expected %0d", err_count, cnt))
    end
    `TB_FINISH
  end
endmodule
