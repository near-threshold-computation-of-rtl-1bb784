// conv_ctrl_tb: the convolution controller against stand-in units that answer each
// start pulse with a done pulse after a random delay. For each operation the sequence
// of started units and their arguments must match the expected program, exactly one
// start may be pulsed per step, and done must follow the last step.
`timescale 1ns/1ps
`include "tb_util.svh"
module conv_ctrl_tb;
  import rlwe_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  rlwe_op_e op = OP_KEYGEN;
  uinstr_t cur;
  logic rdr_start, ntt_start, dp_start, pd_start;
  logic rdr_done = 0, ntt_done = 0, dp_done = 0, pd_done = 0;
  logic [4:0] pc;
  always #5 clk = ~clk;

  conv_ctrl dut (.clk, .rst_n, .start, .op, .busy, .done, .cur, .rdr_start, .ntt_start, .dp_start,
                 .pd_start, .rdr_done, .ntt_done, .dp_done, .pd_done, .pc);

  // Expected steps as text: unit letter then fields.
  //  Rm r s b : reader mode m, ram r, slot s, brev b     N r s : NTT ram r slot s
  //  Do x y z : datapath op o (M/A/S) slots x y z        P x z : poly_div
  string got [$];
  string exp_kg [] = '{"R0 0 0 1", "R0 1 0 1", "R2 1 1 0", "N 0 0", "N 1 0", "DM 0 0 2", "N 0 2",
                       "P 2 4", "DS 4 1 4", "R3 0 4 0"};
  string exp_enc [] = '{"R0 0 0 1", "R0 0 1 1", "R1 1 3 0", "R2 1 0 1", "R2 1 1 0", "R2 1 2 0",
                        "N 0 0", "N 0 1", "N 1 0", "DM 0 0 2", "DM 1 0 3", "N 0 2", "N 0 3",
                        "P 2 4", "P 3 5", "DA 4 1 4", "DA 5 2 5", "DA 5 3 5", "R3 0 4 0", "R3 0 5 0"};
  string exp_dec [] = '{"R0 0 0 1", "R0 1 0 1", "R0 1 1 0", "N 0 0", "N 1 0", "DM 0 0 2", "N 0 2",
                        "P 2 4", "DA 4 1 4", "R4 0 4 0"};

  always @(posedge clk) begin
    if (rst_n) begin
      `CHECK(int'(rdr_start) + int'(ntt_start) + int'(dp_start) + int'(pd_start) <= 1, ("two starts"))
      if (rdr_start) got.push_back($sformatf("R%0d %0d %0d %0d", cur.rmode, cur.ram, cur.sx, cur.brev));
      if (ntt_start) got.push_back($sformatf("N %0d %0d", cur.ram, cur.sx));
      if (dp_start)  got.push_back($sformatf("D%s %0d %0d %0d",
                        (cur.dpop == DP_PMUL) ? "M" : (cur.dpop == DP_ADD) ? "A" : "S", cur.sx, cur.sy, cur.sz));
      if (pd_start)  got.push_back($sformatf("P %0d %0d", cur.sx, cur.sz));
    end
  end

  // stand-in units
  initial begin
    forever begin
      @(posedge clk);
      if (rdr_start || ntt_start || dp_start || pd_start) begin
        logic r, n, d, p;
        r = rdr_start; n = ntt_start; d = dp_start; p = pd_start;
        repeat ($urandom_range(1, 6)) @(negedge clk);
        rdr_done = r; ntt_done = n; dp_done = d; pd_done = p;
        @(negedge clk);
        rdr_done = 0; ntt_done = 0; dp_done = 0; pd_done = 0;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  task automatic run(input rlwe_op_e o, input string exp_s []);
    got.delete();
    @(negedge clk); op = o; start = 1;
    @(negedge clk); start = 0; op = OP_KEYGEN;
    `CHECK(busy, ("not busy after start"))
    while (!done) @(negedge clk);
    `CHECK(got.size() == exp_s.size(), ("op %0d: %0d steps, expected %0d", o, got.size(), exp_s.size()))
    foreach (exp_s[i])
      if (i < got.size()) `CHECK(got[i] == exp_s[i], ("op %0d step %0d: '%s' expected '%s'", o, i, got[i], exp_s[i]))
    @(negedge clk);
    `CHECK(!busy, ("busy after done"))
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(OP_ENCRYPT, exp_enc);
    run(OP_KEYGEN, exp_kg);
    run(OP_DECRYPT, exp_dec);
    `TB_FINISH
  end
endmodule
