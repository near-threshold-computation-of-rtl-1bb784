// razor_ff_tb: the Razor register with clk (10 ns period) and dclk = clk delayed by
// T_del = 3 ns. Data that settles before the clk edge must give q = d and no error;
// data that changes between the clk edge and the dclk edge (a late path) must raise
// err for exactly one cycle after the next clk edge while q keeps the value sampled
// on time. Random mixes of both cases are checked against a model.
`timescale 1ns/1ps
`include "tb_util.svh"
module razor_ff_tb;
  int checks = 0, failures = 0;
  logic clk = 0, dclk = 0, rst_n = 0;
  logic [7:0] d = 0, q;
  logic err;
  always #5 clk = ~clk;
  always @(clk) dclk <= #3 clk;

  razor_ff #(.W(8)) dut (.clk, .dclk, .rst_n, .d, .q, .err);

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    logic [7:0] r_exp, s_exp, nd;
    logic late, e_exp;
    int nlate = 0;
    rst_n = 0;
    #12 rst_n = 1;
    r_exp = 0; s_exp = 0;
    for (int n = 0; n < 2000; n++) begin
      // 2 ns before the clk edge: on-time data
      @(negedge clk); #3;
      nd = 8'($urandom);
      d = nd;
      late = ($urandom_range(0, 3) == 0) && (n > 2);
      @(posedge clk);
      e_exp = (r_exp != s_exp);
      r_exp = d;
      #1;
      `CHECK(q == r_exp, ("cycle %0d q=%h expected %h", n, q, r_exp))
      `CHECK(err == e_exp, ("cycle %0d err=%0b expected %0b", n, err, e_exp))
      if (late) begin
        d = ~d;        // changes 1 ns after clk, before dclk
        nlate++;
      end
      #3;              // dclk edge has passed
      s_exp = d;
    end
    `CHECK(nlate > 100, ("late events %0d", nlate))
    `TB_FINISH
  end
endmodule
