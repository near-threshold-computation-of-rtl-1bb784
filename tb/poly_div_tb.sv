// poly_div_tb: the polynomial divider on a dual-port RAM. Slot 2 holds a random
// 512-word transform output R; afterwards slot 6 must hold
// out[i] = R[-i mod 512] - R[(256 - i) mod 512] mod Q for i < 256 (the remainder of
// the underlying product modulo x^256 + 1), after exactly 2*256 + 1 clocks.
`timescale 1ns/1ps
`include "tb_util.svh"
module poly_div_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  ram_req_t req_a, req_b;
  coef_t rdata_a, rdata_b;
  always #5 clk = ~clk;

  poly_div dut (.clk, .rst_n, .start, .sx(3'd2), .sz(3'd6), .busy, .done, .req_a, .req_b,
                .rdata_a, .rdata_b);
  dp_ram u_ram (.clk, .en_a(req_a.en), .we_a(req_a.we), .addr_a(req_a.addr),
                .wdata_a(req_a.wdata), .rdata_a, .en_b(req_b.en), .we_b(req_b.we),
                .addr_b(req_b.addr), .wdata_b(req_b.wdata), .rdata_b);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  int R [NN];
  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      for (int i = 0; i < NN; i++) begin
        R[i] = int'($urandom_range(0, Q - 1));
        u_ram.mem[{3'd2, LOGNN'(i)}] = coef_t'(R[i]);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      `CHECK(cyc == 2 * N + 1, ("took %0d clocks", cyc))
      for (int i = 0; i < N; i++)
        `CHECK(int'(u_ram.mem[{3'd6, LOGNN'(i)}]) == (R[(NN - i) % NN] - R[(N - i + NN) % NN] + Q) % Q,
               ("word %0d = %0d", i, u_ram.mem[{3'd6, LOGNN'(i)}]))
    end
    `TB_FINISH
  end
endmodule
