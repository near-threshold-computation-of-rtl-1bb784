// rlwe_top_tb: end-to-end test of the accelerator at its default parameters.
//
// Seeds the Trivium generator, then runs
//   KEYGEN  with random a and a small secret r2 (coefficients in [-4, 4]); checks that
//           r1 = p + a*r2 mod (x^256 + 1, Q) has every coefficient in [-54, 54], i.e.
//           p really is a Gaussian sample minus a*r2 (negacyclic product computed here
//           directly);
//   ENCRYPT a random 256-bit message under (a, p);
//   DECRYPT (c1, c2) with r2 and checks the 256 recovered bits;
//   a second ENCRYPT/DECRYPT round with another message.
// All input and output streams stall at random. During one window the Razor shadow
// clock is delayed by 3 ns, so values that change at the clock edge look like late
// arrivals: the test requires Razor errors in that window, none outside it, and a
// raised Vccint setting (capped at 1050 mV) for every partition that saw errors.
// Counted mechanisms, each required at least once: operations of each kind, NTT runs,
// point-wise products, additions, subtractions, divider runs, Gaussian samples, input
// stalls, output stalls, Razor errors, voltage boosts. Encryption latency is printed.
`timescale 1ns/1ps
`include "tb_util.svh"
module rlwe_top_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, clk_d, dclk, rst_n = 0, seed_load = 0, start = 0, skew = 0;
  logic [79:0] key = 80'h0123456789abcdef0123, iv = 80'h0fedcba9876543210fed;
  logic rng_ready, busy, done, in_valid = 0, in_ready, out_valid, out_ready = 0;
  rlwe_op_e op = OP_KEYGEN;
  coef_t in_data = 0, out_data;
  logic [10:0] vccint_mv [5];
  logic [4:0] boost, razor_err;
  logic [15:0] err_count;
  always #5 clk = ~clk;
  always @(clk) clk_d <= #3 clk;
  assign dclk = skew ? clk_d : clk;

  rlwe_top dut (.clk, .dclk, .rst_n, .seed_load, .key, .iv, .rng_ready, .start, .op, .busy,
                .done, .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready,
                .vccint_mv, .boost, .razor_err, .err_count);

  // ---------------- mechanism counters ----------------
  int n_ntt, n_pmul, n_add, n_sub, n_pdiv, n_gauss, n_in_stall, n_out_stall;
  int n_razor, n_boost, n_razor_outside;
  always @(posedge clk) if (rst_n) begin
    if (dut.ntt_done) n_ntt++;
    if (dut.dp_start && dut.cur.dpop == DP_PMUL) n_pmul++;
    if (dut.dp_start && dut.cur.dpop == DP_ADD) n_add++;
    if (dut.dp_start && dut.cur.dpop == DP_SUB) n_sub++;
    if (dut.pd_done) n_pdiv++;
    if (dut.g_valid && dut.g_ready) n_gauss++;
    if (in_ready && !in_valid) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
    if (|razor_err) begin n_razor++; if (!skew) n_razor_outside++; end
    if (|boost) n_boost++;
  end

  // ---------------- streams ----------------
  int inq [$];
  int outq [$];
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(inq.pop_front());
    if (out_valid && out_ready) outq.push_back(int'(out_data));
  end
  always @(negedge clk) begin
    in_valid  <= (inq.size() > 0) && ($urandom_range(0, 4) != 0);
    in_data   <= (inq.size() > 0) ? coef_t'(inq[0]) : '0;
    out_ready <= ($urandom_range(0, 4) != 0);
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  typedef int poly_t [N];

  function automatic poly_t negamul(poly_t a, poly_t b);
    poly_t c;
    longint acc [N];
    for (int i = 0; i < N; i++) acc[i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (i + j < N) acc[i + j] += longint'(a[i]) * b[j];
        else           acc[i + j - N] -= longint'(a[i]) * b[j];
    for (int i = 0; i < N; i++) c[i] = int'(((acc[i] % Q) + Q) % Q);
    return c;
  endfunction

  task automatic run_op(input rlwe_op_e o, output int cyc);
    @(negedge clk); op = o; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  poly_t a, r2, p, m, c1, c2, r1, t;

  task automatic enc_dec(input int round);
    int cyc;
    for (int i = 0; i < N; i++) m[i] = int'($urandom_range(0, 1));
    foreach (a[i]) inq.push_back(a[i]);
    foreach (p[i]) inq.push_back(p[i]);
    foreach (m[i]) inq.push_back(m[i]);
    outq.delete();
    run_op(OP_ENCRYPT, cyc);
    $display("round %0d: encryption took %0d clocks", round, cyc);
    `CHECK(outq.size() == 2 * N, ("encrypt produced %0d words", outq.size()))
    for (int i = 0; i < N; i++) begin c1[i] = outq[i]; c2[i] = outq[N + i]; end
    foreach (c1[i]) inq.push_back(c1[i]);
    foreach (r2[i]) inq.push_back(r2[i]);
    foreach (c2[i]) inq.push_back(c2[i]);
    outq.delete();
    run_op(OP_DECRYPT, cyc);
    $display("round %0d: decryption took %0d clocks", round, cyc);
    `CHECK(outq.size() == N, ("decrypt produced %0d words", outq.size()))
    for (int i = 0; i < N && i < outq.size(); i++)
      `CHECK(outq[i] == m[i], ("round %0d bit %0d: %0d expected %0d", round, i, outq[i], m[i]))
  endtask

  initial begin
    int cyc;
    logic [10:0] v0 [5];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5; k++) v0[k] = vccint_mv[k];
    @(negedge clk); seed_load = 1;
    @(negedge clk); seed_load = 0;
    while (!rng_ready) @(negedge clk);
    // key generation
    for (int i = 0; i < N; i++) begin
      a[i]  = int'($urandom_range(0, Q - 1));
      r2[i] = (int'($urandom_range(0, 8)) - 4 + Q) % Q;
    end
    foreach (a[i]) inq.push_back(a[i]);
    foreach (r2[i]) inq.push_back(r2[i]);
    outq.delete();
    run_op(OP_KEYGEN, cyc);
    $display("key generation took %0d clocks", cyc);
    `CHECK(outq.size() == N, ("keygen produced %0d words", outq.size()))
    for (int i = 0; i < N; i++) p[i] = (i < outq.size()) ? outq[i] : 0;
    t = negamul(a, r2);
    for (int i = 0; i < N; i++) begin
      int v;
      v = (p[i] + t[i]) % Q;
      if (v > Q / 2) v -= Q;
      r1[i] = v;
      `CHECK(v >= -54 && v <= 54, ("r1[%0d] = %0d is not a Gaussian sample", i, v))
    end
    `CHECK(n_razor == 0, ("Razor errors with an undelayed shadow clock"))
    // first round with a late shadow clock during part of the encryption
    fork
      enc_dec(0);
      begin
        repeat (20000) @(negedge clk);
        skew = 1;
        repeat (300) @(negedge clk);
        skew = 0;
      end
    join
    enc_dec(1);
    for (int k = 0; k < 5; k++) begin
      `CHECK(vccint_mv[k] >= v0[k] && vccint_mv[k] <= 11'd1050, ("partition %0d at %0d mV", k, vccint_mv[k]))
      $display("partition %0d: %0d mV -> %0d mV", k, v0[k], vccint_mv[k]);
    end
    `CHECK(n_razor_outside <= 2, ("%0d Razor errors outside the skew window", n_razor_outside))
    $display("mechanisms: ntt=%0d pmul=%0d add=%0d sub=%0d pdiv=%0d gauss=%0d in_stall=%0d out_stall=%0d razor=%0d boost=%0d",
             n_ntt, n_pmul, n_add, n_sub, n_pdiv, n_gauss, n_in_stall, n_out_stall, n_razor, n_boost);
    `CHECK(n_ntt == 3 + 2 * (5 + 3), ("NTT runs %0d", n_ntt))
    `CHECK(n_pmul == 1 + 2 * (2 + 1), ("point-wise products %0d", n_pmul))
    `CHECK(n_add == 2 * (3 + 1), ("additions %0d", n_add))
    `CHECK(n_sub == 1, ("subtractions %0d", n_sub))
    `CHECK(n_pdiv == 1 + 2 * (2 + 1), ("divider runs %0d", n_pdiv))
    `CHECK(n_gauss == N + 2 * 3 * N, ("Gaussian samples %0d", n_gauss))
    `CHECK(n_in_stall > 0, ("no input stall"))
    `CHECK(n_out_stall > 0, ("no output stall"))
    `CHECK(n_razor > 0, ("no Razor error"))
    `CHECK(n_boost > 0, ("no voltage boost"))
    `TB_FINISH
  end
endmodule
