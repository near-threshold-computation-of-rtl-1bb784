// trivium_tb: checks the Trivium generator against a bit-level model of the published
// recurrence (state s1..s288, key in s1..s80, IV in s94..s173, s286..s288 = 1, 1152
// warm-up rounds). Also checks that ready rises exactly 1152 clocks after load and
// that the state only advances when a bit is taken.
`timescale 1ns/1ps
`include "tb_util.svh"
module trivium_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, take = 0;
  logic [79:0] key, iv;
  logic ready, z;
  always #5 clk = ~clk;

  trivium dut (.clk, .rst_n, .load, .key, .iv, .ready, .z, .take);

  bit s [1:288];
  function automatic bit model_out();
    return s[66] ^ s[93] ^ s[162] ^ s[177] ^ s[243] ^ s[288];
  endfunction
  task automatic model_step();
    bit a1, a2, a3;
    a1 = s[66] ^ s[93] ^ (s[91] & s[92]) ^ s[171];
    a2 = s[162] ^ s[177] ^ (s[175] & s[176]) ^ s[264];
    a3 = s[243] ^ s[288] ^ (s[286] & s[287]) ^ s[69];
    for (int i = 288; i > 1; i--) s[i] = s[i-1];
    s[1] = a3; s[94] = a1; s[178] = a2;
  endtask
  task automatic model_init();
    for (int i = 1; i <= 288; i++) s[i] = 0;
    for (int i = 0; i < 80; i++) begin s[i+1] = key[i]; s[i+94] = iv[i]; end
    s[286] = 1; s[287] = 1; s[288] = 1;
    for (int i = 0; i < 1152; i++) model_step();
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    `TB_FINISH
  end

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      key = {$urandom, $urandom, $urandom};
      iv  = {$urandom, $urandom, $urandom};
      if (run == 0) begin key = '0; iv = '0; end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      model_init();
      cyc = 1;
      while (!ready) begin @(negedge clk); cyc++; end
      `CHECK(cyc == 1153, ("ready after %0d clocks, expected 1153 (load + 1152)", cyc))
      for (int n = 0; n < 3000; n++) begin
        take = ($urandom_range(0, 3) != 0);
        `CHECK(z == model_out(), ("run %0d bit %0d: z=%0b model=%0b", run, n, z, model_out()))
        @(negedge clk);
        if (take) model_step();
      end
      take = 0;
    end
    `TB_FINISH
  end
endmodule
