// ntt_ctrl_tb: runs the NTT controller on a dual-port RAM. Random polynomials are
// written in bit-reversed order into slot 3; after the transform slot 3 must hold
// X[k] = sum_j x[j] W^(jk) mod Q in natural order (checked against a direct O(n^2)
// DFT). The run must take exactly 5120 clocks from start to done, and a neighbouring
// slot must be left untouched.
`timescale 1ns/1ps
`include "tb_util.svh"
module ntt_ctrl_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  ram_req_t req_a, req_b;
  coef_t rdata_a, rdata_b, obs_bf;
  always #5 clk = ~clk;

  ntt_ctrl dut (.clk, .rst_n, .start, .slot(3'd3), .busy, .done, .req_a, .req_b, .rdata_a,
                .rdata_b, .obs_bf);
  dp_ram u_ram (.clk, .en_a(req_a.en), .we_a(req_a.we), .addr_a(req_a.addr),
                .wdata_a(req_a.wdata), .rdata_a, .en_b(req_b.en), .we_b(req_b.we),
                .addr_b(req_b.addr), .wdata_b(req_b.wdata), .rdata_b);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  int x [NN];
  int wp [NN];
  int guard [NN];

  initial begin
    int cyc;
    longint acc;
    wp[0] = 1;
    for (int t = 1; t < NN; t++) wp[t] = int'((longint'(wp[t-1]) * 7146) % Q);
    `CHECK(int'((longint'(wp[NN-1]) * 7146) % Q) == 1 && wp[256] == Q - 1, ("root of unity order"))
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      for (int j = 0; j < NN; j++) begin
        x[j] = (run == 0) ? ((j == 1) ? 1 : 0) : int'($urandom_range(0, Q - 1));
        if (run == 2 && j >= N) x[j] = 0;
        u_ram.mem[{3'd3, bitrev(LOGNN'(j))}] = coef_t'(x[j]);
        guard[j] = int'($urandom_range(0, Q - 1));
        u_ram.mem[{3'd4, LOGNN'(j)}] = coef_t'(guard[j]);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      `CHECK(cyc == 5120, ("run %0d took %0d clocks", run, cyc))
      @(negedge clk);
      `CHECK(!busy, ("busy after done"))
      for (int k = 0; k < NN; k++) begin
        acc = 0;
        for (int j = 0; j < NN; j++) acc = (acc + longint'(x[j]) * wp[(j * k) % NN]) % Q;
        `CHECK(int'(u_ram.mem[{3'd3, LOGNN'(k)}]) == int'(acc),
               ("run %0d X[%0d]=%0d expected %0d", run, k, u_ram.mem[{3'd3, LOGNN'(k)}], acc))
        `CHECK(int'(u_ram.mem[{3'd4, LOGNN'(k)}]) == guard[k], ("slot 4 word %0d changed", k))
      end
    end
    `TB_FINISH
  end
endmodule
