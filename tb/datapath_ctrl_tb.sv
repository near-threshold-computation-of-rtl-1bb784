// datapath_ctrl_tb: the datapath controller between two dual-port RAMs.
//   PMUL RAM0.1 x RAM1.2 -> RAM0.4: Z[bitrev(i)] = X[i] Y[i] 512^-1 mod Q, 4 clocks/word
//   ADD  RAM0.1 + RAM1.2 -> RAM1.5: Z[i] = X[i] + Y[i], 3 clocks/word
//   SUB  RAM1.2 - RAM0.1 -> RAM0.1 (in place): Z[i] = Y[i] - X[i]
// Results are compared with integer arithmetic; run lengths are checked in clocks.
`timescale 1ns/1ps
`include "tb_util.svh"
module datapath_ctrl_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, dst = 0;
  logic [1:0] op = 0;
  logic [2:0] sx = 1, sy = 2, sz = 4;
  ram_req_t req0, req1;
  coef_t rdata0, rdata1, q0b, q1b, obs_add;
  always #5 clk = ~clk;

  datapath_ctrl dut (.clk, .rst_n, .start, .op, .sx, .sy, .sz, .dst, .busy, .done, .req0, .req1,
                     .rdata0, .rdata1, .obs_add);
  dp_ram u_r0 (.clk, .en_a(req0.en), .we_a(req0.we), .addr_a(req0.addr), .wdata_a(req0.wdata),
               .rdata_a(rdata0), .en_b(1'b0), .we_b(1'b0), .addr_b('0), .wdata_b('0), .rdata_b(q0b));
  dp_ram u_r1 (.clk, .en_a(req1.en), .we_a(req1.we), .addr_a(req1.addr), .wdata_a(req1.wdata),
               .rdata_a(rdata1), .en_b(1'b0), .we_b(1'b0), .addr_b('0), .wdata_b('0), .rdata_b(q1b));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  int X [NN], Y [NN];

  task automatic run(input logic [1:0] o, input logic [2:0] z, input logic d, input int exp_cyc);
    int cyc;
    @(negedge clk); op = o; sz = z; dst = d; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    `CHECK(cyc == exp_cyc, ("op %0d took %0d clocks, expected %0d", o, cyc, exp_cyc))
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) begin
      X[i] = (i < 4) ? Q - 1 : int'($urandom_range(0, Q - 1));
      Y[i] = (i < 2) ? Q - 1 : int'($urandom_range(0, Q - 1));
      u_r0.mem[{3'd1, LOGNN'(i)}] = coef_t'(X[i]);
      u_r1.mem[{3'd2, LOGNN'(i)}] = coef_t'(Y[i]);
    end
    run(DP_PMUL, 3'd4, 1'b0, 4 * NN + 1);
    for (int i = 0; i < NN; i++)
      `CHECK(int'(u_r0.mem[{3'd4, bitrev(LOGNN'(i))}]) ==
             int'((((longint'(X[i]) * Y[i]) % Q) * 7666) % Q), ("PMUL word %0d", i))
    run(DP_ADD, 3'd5, 1'b1, 3 * N + 1);
    for (int i = 0; i < N; i++)
      `CHECK(int'(u_r1.mem[{3'd5, LOGNN'(i)}]) == (X[i] + Y[i]) % Q, ("ADD word %0d", i))
    sz = 3'd1;
    run(DP_SUB, 3'd1, 1'b0, 3 * N + 1);
    for (int i = 0; i < N; i++)
      `CHECK(int'(u_r0.mem[{3'd1, LOGNN'(i)}]) == (Y[i] - X[i] + Q) % Q, ("SUB word %0d", i))
    `CHECK(int'(u_r0.mem[{3'd1, LOGNN'(N)}]) == X[N], ("SUB wrote past N"))
    `TB_FINISH
  end
endmodule
