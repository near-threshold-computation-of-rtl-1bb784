// dp_ram_tb: random reads and writes on both ports of the dual-port RAM (different
// addresses per cycle) compared with a shadow array; checks one-clock read latency,
// read-old-data on a port that writes, and port B winning a same-address write.
`timescale 1ns/1ps
`include "tb_util.svh"
module dp_ram_tb;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic en_a = 0, we_a = 0, en_b = 0, we_b = 0;
  logic [11:0] addr_a = 0, addr_b = 0;
  logic [12:0] wdata_a = 0, wdata_b = 0, rdata_a, rdata_b;
  always #5 clk = ~clk;

  dp_ram dut (.clk, .en_a, .we_a, .addr_a, .wdata_a, .rdata_a, .en_b, .we_b, .addr_b, .wdata_b,
              .rdata_b);

  logic [12:0] sh [4096];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    logic [12:0] ea, eb;
    logic ra, rb;
    // initialise a window through both ports
    for (int i = 0; i < 256; i += 2) begin
      @(negedge clk);
      en_a = 1; we_a = 1; addr_a = 12'(i);     wdata_a = 13'($urandom); sh[i] = wdata_a;
      en_b = 1; we_b = 1; addr_b = 12'(i + 1); wdata_b = 13'($urandom); sh[i+1] = wdata_b;
    end
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      en_a = 1'($urandom); we_a = 1'($urandom); addr_a = 12'($urandom_range(0, 255));
      en_b = 1'($urandom); we_b = 1'($urandom); addr_b = 12'($urandom_range(0, 255));
      if (addr_b == addr_a) addr_b = addr_b ^ 12'd1;
      wdata_a = 13'($urandom); wdata_b = 13'($urandom);
      ea = sh[addr_a]; eb = sh[addr_b]; ra = en_a; rb = en_b;
      if (en_a && we_a) sh[addr_a] = wdata_a;
      if (en_b && we_b) sh[addr_b] = wdata_b;
      @(posedge clk); #1;
      if (ra) `CHECK(rdata_a == ea, ("cycle %0d port A %h expected %h", n, rdata_a, ea))
      if (rb) `CHECK(rdata_b == eb, ("cycle %0d port B %h expected %h", n, rdata_b, eb))
    end
    // same-address write: B wins
    @(negedge clk);
    en_a = 1; we_a = 1; addr_a = 12'd7; wdata_a = 13'h0aa;
    en_b = 1; we_b = 1; addr_b = 12'd7; wdata_b = 13'h155;
    @(negedge clk);
    we_a = 0; en_b = 0;
    @(negedge clk);
    `CHECK(rdata_a == 13'h155, ("collision result %h", rdata_a))
    `TB_FINISH
  end
endmodule
