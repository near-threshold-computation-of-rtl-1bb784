// rlwe_top: RLWE public-key encryption accelerator with per-partition Razor monitoring.
//
// Ring R_q = Z_7681[x]/(x^256 + 1). One operation (key generation, encryption or
// decryption, input `op`) runs per `start` pulse; `done` pulses at its end.
//   KEYGEN : in  a, r2 (2 x 256 coefficients)          out p = r1 - a*r2 (256)
//   ENCRYPT: in  a, p (2 x 256 coefficients), m (256 bits, bit 0 of in_data)
//            out c1 = a*e1 + e2, c2 = p*e1 + e3 + m~ (2 x 256 coefficients)
//   DECRYPT: in  c1, r2, c2 (3 x 256 coefficients)     out m (256 bits, in bit 0)
// r1, e1, e2, e3 come from the Knuth-Yao Gaussian sampler fed by the Trivium
// generator, which must have been seeded (`seed_load` with key/iv) and warmed up.
// Input and output are valid/ready streams of 13-bit coefficients in index order.
//
// Inside: the convolution controller runs the operation's program and hands the two
// dual-port RAMs to the reader, the NTT controller, the datapath controller or the
// polynomial divider, whichever runs the current step. Products use a 512-point NTT
// (cyclic, so the full product is formed) and are folded modulo x^256 + 1.
//
// Near-threshold support: the paper's fourteen subcomponents each carry a Razor
// register (razor_ff) on one of their outputs, clocked by clk with its shadow on dclk
// (clk delayed by T_del, supplied from outside). PART maps subcomponent i to a voltage
// partition; the error flags of a partition are ORed and the error control unit
// raises that partition's Vccint setting by one step. vccint_mv/boost go to the
// external supply circuit. The default partition map and critical paths are the
// paper's K-Means clustering (five partitions). VMIN_MV/VMAX_MV set the voltage range
// of the calibration and the error-driven ceiling: 950-1050 mV by default (the
// commercial device's guard band); the paper also evaluates a 500-1300 mV range.
// Placing each Razor register as a monitoring copy of an existing output, rather
// than inside the unit's own pipeline, is this design's choice.
//
// Subcomponent index i (monitored signal): 0 RAM1 (RAM0 port A data), 1 RAM2 (RAM1
// port A data), 2 row column controller (row_number), 3 distance (d), 4 reader (write
// data), 5 poly_add (sum), 6 datapath (write data), 7 scanner (valid, bit), 8 ROM (word),
// 9 polynomial multiplier (butterfly sum), 10 NTT controller (address),
// 11 convolution controller (program counter), 12 poly_div (write data), 13 rand (bit).
module rlwe_top
  import rlwe_pkg::*;
#(
  parameter int        NPART = 5,
  parameter comp_vec_t PART  = '{0, 0, 0, 0, 0, 0, 1, 2, 2, 3, 4, 4, 4, 4},
  parameter comp_vec_t CP_PS = '{2217, 2217, 1900, 1900, 2394, 2101, 8603,
                                 3332, 3654, 5327, 1170, 1725, 1323, 1412},
  parameter int        VMIN_MV  = 950,
  parameter int        VMAX_MV  = 1050,
  parameter int        VSTEP_MV = 10
) (
  input  logic             clk,
  input  logic             dclk,
  input  logic             rst_n,
  input  logic             seed_load,
  input  logic [79:0]      key,
  input  logic [79:0]      iv,
  output logic             rng_ready,
  input  logic             start,
  input  rlwe_op_e         op,
  output logic             busy,
  output logic             done,
  input  logic             in_valid,
  input  coef_t            in_data,
  output logic             in_ready,
  output logic             out_valid,
  output coef_t            out_data,
  input  logic             out_ready,
  output logic [10:0]      vccint_mv [NPART],
  output logic [NPART-1:0] boost,
  output logic [NPART-1:0] razor_err,
  output logic [15:0]      err_count
);
  // ---------------- random bits and Gaussian samples ----------------
  logic rbit, rbit_take;
  trivium u_rnd (.clk, .rst_n, .load(seed_load), .key, .iv, .ready(rng_ready), .z(rbit),
                 .take(rbit_take));

  logic              g_valid, g_ready;
  coef_t             g_data;
  logic [5:0]        obs_row;
  logic signed [8:0] obs_dist;
  logic [60:0]       obs_rom;
  logic [1:0]        obs_scan;
  gaussian_sampler u_gs (.clk, .rst_n, .rbit, .rbit_valid(rng_ready), .rbit_take,
                         .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data),
                         .obs_row, .obs_dist, .obs_rom, .obs_scan);

  // ---------------- sequencer ----------------
  uinstr_t    cur;
  logic       rdr_start, ntt_start, dp_start, pd_start;
  logic       rdr_done, ntt_done, dp_done, pd_done;
  logic [4:0] pc;
  conv_ctrl u_conv (.clk, .rst_n, .start, .op, .busy, .done, .cur, .rdr_start, .ntt_start,
                    .dp_start, .pd_start, .rdr_done, .ntt_done, .dp_done, .pd_done, .pc);

  // ---------------- RAMs ----------------
  ram_req_t r0a, r0b, r1a, r1b;
  coef_t    q0a, q0b, q1a, q1b;
  dp_ram #(.DW(QW), .AW(AW)) u_ram0 (.clk,
    .en_a(r0a.en), .we_a(r0a.we), .addr_a(r0a.addr), .wdata_a(r0a.wdata), .rdata_a(q0a),
    .en_b(r0b.en), .we_b(r0b.we), .addr_b(r0b.addr), .wdata_b(r0b.wdata), .rdata_b(q0b));
  dp_ram #(.DW(QW), .AW(AW)) u_ram1 (.clk,
    .en_a(r1a.en), .we_a(r1a.we), .addr_a(r1a.addr), .wdata_a(r1a.wdata), .rdata_a(q1a),
    .en_b(r1b.en), .we_b(r1b.we), .addr_b(r1b.addr), .wdata_b(r1b.wdata), .rdata_b(q1b));

  // ---------------- units ----------------
  ram_req_t rdr_req, ntt_a, ntt_b, dp0, dp1, pd_a, pd_b;
  logic     rdr_busy, ntt_busy, dp_busy, pd_busy;
  coef_t    obs_bf, obs_add;

  reader u_rdr (.clk, .rst_n, .start(rdr_start), .mode(cur.rmode), .slot(cur.sx),
                .brev(cur.brev), .busy(rdr_busy), .done(rdr_done), .in_valid, .in_data,
                .in_ready, .g_valid, .g_data, .g_ready, .out_valid, .out_data, .out_ready,
                .req(rdr_req), .rdata(cur.ram ? q1a : q0a));

  ntt_ctrl u_ntt (.clk, .rst_n, .start(ntt_start), .slot(cur.sx), .busy(ntt_busy),
                  .done(ntt_done), .req_a(ntt_a), .req_b(ntt_b),
                  .rdata_a(cur.ram ? q1a : q0a), .rdata_b(cur.ram ? q1b : q0b), .obs_bf);

  datapath_ctrl u_dp (.clk, .rst_n, .start(dp_start), .op(cur.dpop), .sx(cur.sx),
                      .sy(cur.sy), .sz(cur.sz), .dst(cur.dst), .busy(dp_busy),
                      .done(dp_done), .req0(dp0), .req1(dp1), .rdata0(q0a), .rdata1(q1a),
                      .obs_add);

  poly_div u_pd (.clk, .rst_n, .start(pd_start), .sx(cur.sx), .sz(cur.sz), .busy(pd_busy),
                 .done(pd_done), .req_a(pd_a), .req_b(pd_b), .rdata_a(q0a), .rdata_b(q0b));

  // RAM port ownership follows the step being executed.
  always_comb begin
    r0a = RAM_IDLE;
    r0b = RAM_IDLE;
    r1a = RAM_IDLE;
    r1b = RAM_IDLE;
    unique case (cur.unit)
      U_RDR:  if (cur.ram) r1a = rdr_req; else r0a = rdr_req;
      U_NTT:  if (cur.ram) begin r1a = ntt_a; r1b = ntt_b; end
              else         begin r0a = ntt_a; r0b = ntt_b; end
      U_DP:   begin r0a = dp0; r1a = dp1; end
      U_PDIV: begin r0a = pd_a; r0b = pd_b; end
      default: ;
    endcase
  end

  // ---------------- Razor monitoring and error control ----------------
  // The Razor main-register outputs (rq*) are only copies of the monitored signals;
  // the units keep using their own registers, so rq* are left unread by design.
  logic [NCOMP-1:0] cerr;
  logic [12:0] rq0, rq1, rq4, rq5, rq6, rq9, rq12;
  logic [5:0]  rq2;
  logic [8:0]  rq3;
  logic [1:0]  rq7;
  logic [60:0] rq8;
  logic [11:0] rq10;
  logic [4:0]  rq11;
  logic [0:0]  rq13;

  razor_ff #(.W(13)) u_rz0  (.clk, .dclk, .rst_n, .d(q0a),          .q(rq0),  .err(cerr[0]));
  razor_ff #(.W(13)) u_rz1  (.clk, .dclk, .rst_n, .d(q1a),          .q(rq1),  .err(cerr[1]));
  razor_ff #(.W(6))  u_rz2  (.clk, .dclk, .rst_n, .d(obs_row),      .q(rq2),  .err(cerr[2]));
  razor_ff #(.W(9))  u_rz3  (.clk, .dclk, .rst_n, .d(obs_dist),     .q(rq3),  .err(cerr[3]));
  razor_ff #(.W(13)) u_rz4  (.clk, .dclk, .rst_n, .d(rdr_req.wdata), .q(rq4), .err(cerr[4]));
  razor_ff #(.W(13)) u_rz5  (.clk, .dclk, .rst_n, .d(obs_add),      .q(rq5),  .err(cerr[5]));
  razor_ff #(.W(13)) u_rz6  (.clk, .dclk, .rst_n, .d(dp0.wdata),    .q(rq6),  .err(cerr[6]));
  razor_ff #(.W(2))  u_rz7  (.clk, .dclk, .rst_n, .d(obs_scan),     .q(rq7),  .err(cerr[7]));
  razor_ff #(.W(61)) u_rz8  (.clk, .dclk, .rst_n, .d(obs_rom),      .q(rq8),  .err(cerr[8]));
  razor_ff #(.W(13)) u_rz9  (.clk, .dclk, .rst_n, .d(obs_bf),       .q(rq9),  .err(cerr[9]));
  razor_ff #(.W(12)) u_rz10 (.clk, .dclk, .rst_n, .d(ntt_a.addr),   .q(rq10), .err(cerr[10]));
  razor_ff #(.W(5))  u_rz11 (.clk, .dclk, .rst_n, .d(pc),           .q(rq11), .err(cerr[11]));
  razor_ff #(.W(13)) u_rz12 (.clk, .dclk, .rst_n, .d(pd_a.wdata),   .q(rq12), .err(cerr[12]));
  razor_ff #(.W(1))  u_rz13 (.clk, .dclk, .rst_n, .d(rbit),         .q(rq13), .err(cerr[13]));

  always_comb begin
    razor_err = '0;
    for (int i = 0; i < NCOMP; i++)
      if (PART[i] < NPART) razor_err[PART[i]] = razor_err[PART[i]] | cerr[i];
  end

  error_ctrl #(.NPART(NPART), .VMIN_MV(VMIN_MV), .VMAX_MV(VMAX_MV), .VSTEP_MV(VSTEP_MV),
               .VINIT(calib_mv(CP_PS, PART, NPART, VMIN_MV, VMAX_MV))) u_ecu (
    .clk, .rst_n, .err(razor_err), .vccint_mv, .boost, .err_count);

  // Only the unit named by the current step may be active.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({rdr_busy, ntt_busy, dp_busy, pd_busy}));
endmodule
