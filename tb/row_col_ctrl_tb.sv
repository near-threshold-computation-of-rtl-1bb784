// row_col_ctrl_tb: drives random clear/load/step sequences into the row column
// controller and compares column_length, row_number, row and col_done with a
// reference model every clock.
`timescale 1ns/1ps
`include "tb_util.svh"
module row_col_ctrl_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, step = 0;
  logic [5:0] delta = 0, column_length, row_number, row;
  logic col_done;
  always #5 clk = ~clk;

  row_col_ctrl dut (.clk, .rst_n, .clear, .load, .delta, .step, .column_length, .row_number,
                    .row, .col_done);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    int cl = 0, rn = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    `CHECK(column_length == 0 && row_number == 0 && col_done, ("after reset"))
    for (int n = 0; n < 5000; n++) begin
      int r;
      r = $urandom_range(0, 19);
      clear = (r == 0);
      load  = (r >= 1 && r <= 3);
      step  = (r >= 4);
      delta = 6'($urandom_range(0, 3));
      @(negedge clk);
      if (clear) begin cl = 0; rn = 0; end
      else if (load) begin cl = (cl + delta) % 64; rn = cl; end
      else if (step && rn != 0) rn--;
      `CHECK(column_length == 6'(cl) && row_number == 6'(rn),
             ("cycle %0d: cl=%0d rn=%0d expected %0d %0d", n, column_length, row_number, cl, rn))
      `CHECK(col_done == (rn == 0) && (rn == 0 || row == 6'(rn - 1)), ("cycle %0d row/done", n))
    end
    `TB_FINISH
  end
endmodule
