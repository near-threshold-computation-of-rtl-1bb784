// reader_tb: the reader on one dual-port RAM with random stall patterns on every
// stream. Checks
//  - LOAD_COEF, bit-reversed: coefficient i at address bitrev(i), words 256..511 of
//    the slot (bit-reversed) zeroed, 512 writes;
//  - LOAD_MSG, natural: bit b at address i encoded as b * 3840;
//  - LOAD_GAUSS, natural: sampler stream copied in order;
//  - STORE_COEF: slot read out in natural order;
//  - STORE_BITS: decoding, 1 exactly for Q/4 < x < 3Q/4, including the border values.
`timescale 1ns/1ps
`include "tb_util.svh"
module reader_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, brev = 0, busy, done;
  logic [2:0] mode = 0, slot = 0;
  logic in_valid = 0, in_ready, g_valid = 0, g_ready, out_valid, out_ready = 0;
  coef_t in_data = 0, g_data = 0, out_data, rdata, q_b;
  ram_req_t req;
  always #5 clk = ~clk;

  reader dut (.clk, .rst_n, .start, .mode, .slot, .brev, .busy, .done, .in_valid, .in_data,
              .in_ready, .g_valid, .g_data, .g_ready, .out_valid, .out_data, .out_ready, .req,
              .rdata);
  dp_ram u_ram (.clk, .en_a(req.en), .we_a(req.we), .addr_a(req.addr), .wdata_a(req.wdata),
                .rdata_a(rdata), .en_b(1'b0), .we_b(1'b0), .addr_b('0), .wdata_b('0), .rdata_b(q_b));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  int src [N];
  int sp, op_n;
  int outv [N];

  // source streams: present src[sp] with random gaps, advance on handshake
  always @(posedge clk) begin
    if (in_valid && in_ready) sp <= sp + 1;
    if (g_valid && g_ready) sp <= sp + 1;
    if (out_valid && out_ready) begin outv[op_n] <= int'(out_data); op_n <= op_n + 1; end
  end
  always @(negedge clk) begin
    in_data   <= coef_t'(src[sp % N]);
    g_data    <= coef_t'(src[sp % N]);
    in_valid  <= (mode != R_LOAD_GAUSS) && ($urandom_range(0, 3) != 0);
    g_valid   <= (mode == R_LOAD_GAUSS) && ($urandom_range(0, 3) != 0);
    out_ready <= ($urandom_range(0, 2) != 0);
  end


  task automatic go(input logic [2:0] m, input logic [2:0] s, input logic b);
    @(negedge clk);
    sp = 0; op_n = 0;
    mode = m; slot = s; brev = b; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NN; i++) u_ram.mem[{3'd1, LOGNN'(i)}] = coef_t'(1 + i);
    // coefficients, bit reversed
    for (int i = 0; i < N; i++) src[i] = int'($urandom_range(0, Q - 1));
    go(R_LOAD_COEF, 3'd1, 1'b1);
    `CHECK(sp == N, ("consumed %0d inputs", sp))
    for (int i = 0; i < NN; i++)
      `CHECK(int'(u_ram.mem[{3'd1, bitrev(LOGNN'(i))}]) == ((i < N) ? src[i] : 0), ("brev word %0d", i))
    // message bits
    for (int i = 0; i < N; i++) src[i] = int'($urandom_range(0, 1)) | (int'($urandom_range(0, 7)) << 1);
    go(R_LOAD_MSG, 3'd2, 1'b0);
    for (int i = 0; i < N; i++)
      `CHECK(int'(u_ram.mem[{3'd2, LOGNN'(i)}]) == ((src[i] & 1) ? 3840 : 0), ("msg word %0d", i))
    // gaussian stream
    for (int i = 0; i < N; i++) src[i] = int'($urandom_range(0, Q - 1));
    go(R_LOAD_GAUSS, 3'd3, 1'b0);
    for (int i = 0; i < N; i++)
      `CHECK(int'(u_ram.mem[{3'd3, LOGNN'(i)}]) == src[i], ("gauss word %0d", i))
    // store coefficients
    go(R_STORE_COEF, 3'd3, 1'b0);
    `CHECK(op_n == N, ("stored %0d words", op_n))
    for (int i = 0; i < N; i++) `CHECK(outv[i] == src[i], ("store word %0d", i))
    // store decoded bits
    for (int i = 0; i < N; i++) begin
      int v;
      v = (i < 8) ? ((i % 2 == 0) ? 1920 + i / 2 : 5759 + i / 2) : int'($urandom_range(0, Q - 1));
      u_ram.mem[{3'd4, LOGNN'(i)}] = coef_t'(v);
      src[i] = (v > 1920 && v < 5761) ? 1 : 0;
    end
    go(R_STORE_BITS, 3'd4, 1'b0);
    for (int i = 0; i < N; i++) `CHECK(outv[i] == src[i], ("decode word %0d: %0d", i, outv[i]))
    `TB_FINISH
  end
endmodule
