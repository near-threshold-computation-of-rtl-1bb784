// gaussian_sampler_tb: feeds the sampler a known random bit sequence (with random
// gaps) and compares every sample with a behavioural Knuth-Yao model run on the same
// bits and the same probability table. Also checks the sample statistics (mean near
// 0, variance near sigma^2 = 11.32^2 / (2 pi) = 20.4) and that every output lies in
// [-54, 54] mod Q. The consumer applies random back-pressure.
`timescale 1ns/1ps
`include "tb_util.svh"
module gaussian_sampler_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  localparam int NS = 3000;
  logic clk = 0, rst_n = 0;
  logic rbit, rbit_valid = 0, rbit_take, out_valid, out_ready = 0;
  coef_t out_data;
  logic [5:0] obs_row;
  logic signed [8:0] obs_dist;
  logic [60:0] obs_rom;
  logic [1:0] obs_scan;
  always #5 clk = ~clk;

  gaussian_sampler dut (.clk, .rst_n, .rbit, .rbit_valid, .rbit_take, .out_valid, .out_ready,
                        .out_data, .obs_row, .obs_dist, .obs_rom, .obs_scan);

  localparam int NB = 200000;
  bit bits [NB];
  int bp = 0;
  assign rbit = bits[bp];
  logic [60:0] tab [90];

  always @(posedge clk) if (rst_n && rbit_valid && rbit_take) bp <= bp + 1;
  always @(negedge clk) begin
    rbit_valid <= ($urandom_range(0, 7) != 0);
    out_ready  <= ($urandom_range(0, 3) != 0);
  end

  // Reference Knuth-Yao: returns a signed sample, consuming bits from mp.
  int mp = 0;
  function automatic int model_sample();
    forever begin
      int d, cl;
      d = 0; cl = 0;
      for (int c = 0; c < 90; c++) begin
        d = 2 * d + int'(bits[mp]); mp++;
        cl += int'(tab[c][60:55]);
        for (int r = cl - 1; r >= 0; r--) begin
          d -= int'(tab[c][r]);
          if (d < 0) begin
            bit sgn;
            sgn = bits[mp]; mp++;
            return sgn ? -r : r;
          end
        end
      end
    end
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    int got, exp_v, n;
    real sum, sq, mean, var_;
    $readmemh("rtl/kyrom.hex", tab);
    foreach (bits[i]) bits[i] = 1'($urandom);
    sum = 0; sq = 0; n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (n < NS) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        exp_v = model_sample();
        got = (int'(out_data) > Q / 2) ? int'(out_data) - Q : int'(out_data);
        `CHECK(got == exp_v, ("sample %0d: %0d expected %0d", n, got, exp_v))
        `CHECK(got >= -54 && got <= 54, ("sample %0d out of range: %0d", n, got))
        sum += got; sq += got * got; n++;
      end
    end
    mean = sum / NS;
    var_ = sq / NS - mean * mean;
    $display("mean %f variance %f", mean, var_);
    `CHECK(mean > -0.5 && mean < 0.5, ("mean %f", mean))
    `CHECK(var_ > 18.0 && var_ < 23.0, ("variance %f", var_))
    `TB_FINISH
  end
endmodule
