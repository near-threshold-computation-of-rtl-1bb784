// partition_configs_tb: the accelerator under the four voltage-partition layouts.
//
// Five copies of rlwe_top run side by side on the same clock, seed and input streams.
// They differ only in the partition map (PART, NPART) or voltage range:
//   0 K-Means      5 partitions  {RAMs, row/col ctrl, distance, reader, poly_add}
//                                {datapath} {scanner, ROM} {multiplier}
//                                {NTT ctrl, conv ctrl, poly_div, RND}
//   1 DBSCAN       3 partitions  {cluster 1, 2, 6} {datapath} {scanner, ROM, multiplier}
//   2 Mean-Shift   4 partitions  {all small units} {datapath} {scanner, ROM} {multiplier}
//   3 Hierarchical 3 partitions  {cluster 1, 5} {datapath, multiplier} {scanner, ROM}
//   4 K-Means map again, with the wide 500-1300 mV voltage range instead of 950-1050
// Each copy generates a key pair and encrypts one message. The checks are:
//  - every copy's output stream is identical to the K-Means copy's (partitioning must
//    not change the result);
//  - after reset, each partition's Vccint setting equals the calibration formula
//    Vmin + avg_CP_k * (Vmax - Vmin) / sum_j avg_CP_j, recomputed here in real
//    arithmetic from the critical path table;
//  - for the layouts whose published voltages follow that formula (K-Means worked
//    example 0.96/0.995/0.965/0.975/0.955 V, Mean-Shift 0.96/1.00/0.97/0.98 V), the
//    setting is within 6 mV of the published value; the other two are printed;
//  - the shadow clock is skewed by 3 ns for one window; in every copy each partition
//    ends at min(Vmax, start + 10 mV x clocks with a Razor error in that partition),
//    and at least one partition saw errors.
// A watchdog ends the run after 400,000 clocks.
`timescale 1ns/1ps
`include "tb_util.svh"
module partition_configs_tb;
  import rlwe_pkg::*;
  localparam int NCFG = 5;
  int checks = 0, failures = 0;
  logic clk = 0, clk_d, dclk, rst_n = 0, seed_load = 0, start = 0, skew = 0;
  logic [79:0] key = 80'h13579bdf02468ace1357, iv = 80'h2468ace013579bdf0246;
  logic in_valid = 0, out_ready = 1;
  coef_t in_data = 0;
  rlwe_op_e op = OP_KEYGEN;
  always #5 clk = ~clk;
  always @(clk) clk_d <= #3 clk;
  assign dclk = skew ? clk_d : clk;

  localparam comp_vec_t CP = '{2217, 2217, 1900, 1900, 2394, 2101, 8603,
                               3332, 3654, 5327, 1170, 1725, 1323, 1412};

  function automatic comp_vec_t cfg_map(int c);
    case (c)
      0:       return '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 4, 4, 4, 4};
      1:       return '{0, 0, 0, 0, 0, 0, 1, 2, 2, 2, 0, 0, 0, 0};
      2:       return '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 0, 0, 0, 0};
      3:       return '{0, 0, 0, 0, 0, 0, 1, 2, 2, 1, 0, 0, 0, 0};
      default: return '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 4, 4, 4, 4};
    endcase
  endfunction
  function automatic int cfg_np(int c);
    case (c) 1: return 3; 2: return 4; 3: return 3; default: return 5; endcase
  endfunction
  function automatic int cfg_vmin(int c); return (c == 4) ? 500 : 950; endfunction
  function automatic int cfg_vmax(int c); return (c == 4) ? 1300 : 1050; endfunction
  // published voltages in mV (0 = not compared)
  function automatic int paper_mv(int c, int k);
    int km [5] = '{960, 995, 965, 975, 955};
    int ms [4] = '{960, 1000, 970, 980};
    if (c == 0) return km[k];
    if (c == 2) return ms[k];
    return 0;
  endfunction

  // per-copy observation, flattened to MAXP partitions
  logic                ready   [NCFG];
  logic                done_w  [NCFG];
  logic                inrdy   [NCFG];
  logic                ovalid  [NCFG];
  coef_t               odata   [NCFG];
  logic [MAXP-1:0]     rerr    [NCFG];
  int                  vmv     [NCFG][MAXP];
  int                  nerr    [NCFG][MAXP];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int NP = cfg_np(g);
    logic [10:0]   v [NP];
    logic [NP-1:0] boost, razor_err;
    logic [15:0]   err_count;
    logic          busy, rng_ready, done, in_ready, out_valid;
    coef_t         out_data;
    rlwe_top #(.NPART(NP), .PART(cfg_map(g)), .CP_PS(CP),
               .VMIN_MV(cfg_vmin(g)), .VMAX_MV(cfg_vmax(g))) dut (
      .clk, .dclk, .rst_n, .seed_load, .key, .iv, .rng_ready, .start, .op, .busy, .done,
      .in_valid, .in_data, .in_ready, .out_valid, .out_data, .out_ready,
      .vccint_mv(v), .boost, .razor_err, .err_count);
    always_comb begin
      ready[g] = rng_ready; done_w[g] = done; inrdy[g] = in_ready;
      ovalid[g] = out_valid; odata[g] = out_data;
      rerr[g] = MAXP'(razor_err);
      for (int k = 0; k < MAXP; k++) vmv[g][k] = (k < NP) ? int'(v[k]) : 0;
    end
    always @(posedge clk) if (rst_n)
      for (int k = 0; k < NP; k++) if (razor_err[k]) nerr[g][k]++;
  end

  // independent calibration model
  function automatic int model_mv(int c, int k);
    real sum [MAXP], cnt [MAXP], tot, avg;
    comp_vec_t m = cfg_map(c);
    for (int j = 0; j < MAXP; j++) begin sum[j] = 0.0; cnt[j] = 0.0; end
    for (int i = 0; i < NCOMP; i++) begin sum[m[i]] += real'(CP[i]); cnt[m[i]] += 1.0; end
    tot = 0.0;
    for (int j = 0; j < cfg_np(c); j++) tot += sum[j] / cnt[j];
    avg = sum[k] / cnt[k];
    return int'($floor(real'(cfg_vmin(c)) + avg * real'(cfg_vmax(c) - cfg_vmin(c)) / tot + 1e-9));
  endfunction

  int start_mv [NCFG][MAXP];
  int nout;

  // all copies must run in lockstep with identical outputs
  always @(posedge clk) if (rst_n) begin
    for (int g = 1; g < NCFG; g++) begin
      if (ovalid[g] !== ovalid[0] || (ovalid[0] && odata[g] !== odata[0])) begin
        failures++;
        $display("FAIL: copy %0d output differs from copy 0", g);
      end
    end
    if (ovalid[0]) begin checks++; nout++; end
  end

  // input stream: words queued here are offered on the falling edge
  int inq [$];
  always @(posedge clk) if (in_valid && inrdy[0]) void'(inq.pop_front());
  always @(negedge clk) begin
    in_valid <= (inq.size() > 0);
    in_data  <= (inq.size() > 0) ? coef_t'(inq[0]) : '0;
  end

  // ncoef random coefficients, then nbits random message bits
  task automatic run(input rlwe_op_e o, input int ncoef, input int nbits);
    for (int i = 0; i < ncoef; i++) inq.push_back(int'($urandom_range(0, Q - 1)));
    for (int i = 0; i < nbits; i++) inq.push_back(int'($urandom_range(0, 1)));
    @(negedge clk); op = o; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done_w[0]) @(negedge clk);
  endtask

  initial begin
    for (int g = 0; g < NCFG; g++) for (int k = 0; k < MAXP; k++) nerr[g][k] = 0;
    nout = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int g = 0; g < NCFG; g++)
      for (int k = 0; k < cfg_np(g); k++) begin
        start_mv[g][k] = vmv[g][k];
        `CHECK(vmv[g][k] == model_mv(g, k), ("cfg %0d partition %0d starts at %0d mV, expected %0d",
                                             g, k, vmv[g][k], model_mv(g, k)))
        if (paper_mv(g, k) != 0)
          `CHECK(vmv[g][k] - paper_mv(g, k) <= 6 && paper_mv(g, k) - vmv[g][k] <= 6,
                 ("cfg %0d partition %0d: %0d mV, published %0d mV", g, k, vmv[g][k], paper_mv(g, k)))
        $display("cfg %0d partition %0d: start %0d mV (published %0d)", g, k, vmv[g][k],
                 paper_mv(g, k));
      end
    seed_load <= 1'b1; @(posedge clk); seed_load <= 1'b0;
    while (!ready[0]) @(posedge clk);
    run(OP_KEYGEN, 512, 0);
    fork
      run(OP_ENCRYPT, 512, 256);
      begin repeat (3000) @(posedge clk); skew = 1; repeat (400) @(posedge clk); skew = 0; end
    join
    repeat (2) @(posedge clk);
    `CHECK(nout == 256 + 512, ("%0d output words, expected 768", nout))
    begin
      int any, exp_mv;
      any = 0;
      for (int g = 0; g < NCFG; g++)
        for (int k = 0; k < cfg_np(g); k++) begin
          exp_mv = start_mv[g][k] + 10 * nerr[g][k];
          if (exp_mv > cfg_vmax(g)) exp_mv = cfg_vmax(g);
          any += nerr[g][k];
          `CHECK(vmv[g][k] == exp_mv, ("cfg %0d partition %0d ends at %0d mV, expected %0d",
                                       g, k, vmv[g][k], exp_mv))
          $display("cfg %0d partition %0d: %0d error clocks, %0d -> %0d mV", g, k,
                   nerr[g][k], start_mv[g][k], vmv[g][k]);
        end
      `CHECK(any > 0, ("no Razor error seen in the skew window"))
    end
    `TB_FINISH
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
