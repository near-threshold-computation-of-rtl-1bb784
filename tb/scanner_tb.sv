// scanner_tb: checks the scanner with the real ROM. After start and after every
// next_col the word must become valid exactly 3 clocks later, and then every row's
// bit and the delta field must equal the ROM table read directly by the testbench.
`timescale 1ns/1ps
`include "tb_util.svh"
module scanner_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, next_col = 0;
  logic [6:0]  rom_addr;
  logic [60:0] rom_data;
  logic [5:0]  row = 0;
  logic pbit, word_valid, last_col;
  logic [5:0] delta;
  always #5 clk = ~clk;

  kyrom   u_rom (.clk, .addr(rom_addr), .data(rom_data));
  scanner dut (.clk, .rst_n, .start, .next_col, .rom_addr, .rom_data, .row, .pbit, .delta,
               .word_valid, .last_col);

  logic [60:0] tab [90];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    int lat;
    $readmemh("rtl/kyrom.hex", tab);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 90; c++) begin
      @(negedge clk);
      if (c == 0) start = 1; else next_col = 1;
      @(negedge clk);
      start = 0; next_col = 0;
      lat = 1;
      while (!word_valid && lat < 10) begin @(negedge clk); lat++; end
      `CHECK(lat == 3, ("column %0d valid after %0d clocks", c, lat))
      `CHECK(delta == tab[c][60:55], ("column %0d delta %0d", c, delta))
      `CHECK(last_col == (c == 89), ("column %0d last_col %0b", c, last_col))
      for (int r = 0; r < 56; r++) begin
        row = 6'(r);
        #1;
        `CHECK(pbit == ((r < 55) ? tab[c][r] : 1'b0), ("column %0d row %0d bit %0b", c, r, pbit))
      end
    end
    `TB_FINISH
  end
endmodule
