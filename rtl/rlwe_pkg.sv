// rlwe_pkg: constants, types and helper functions shared by the RLWE accelerator.
//
// Ring parameters follow the (n, q, s) = (256, 7681, 11.32) set used by the design:
// polynomials of N = 256 coefficients modulo Q = 7681. Products are formed with a
// cyclic number theoretic transform of length NN = 2N = 512 (Q = 1 mod 512, so a
// primitive 512-th root of unity exists) and then folded modulo x^N + 1 by the
// polynomial divider. W_NN = 7146 is that root (17 is a generator of Z_7681^*, and
// 7146 = 17^15 mod 7681), NN_INV = 512^-1 mod 7681 = 7666. These two constants are
// this implementation's choice; the ring parameters are the paper's.
//
// The package also holds the RAM request struct used on every memory port and the
// offline voltage calibration (average critical path per partition, then a linear
// share of the Vccint range), evaluated at elaboration to seed the error control
// unit.
package rlwe_pkg;

  localparam int N      = 256;
  localparam int Q      = 7681;
  localparam int QW     = 13;          // coefficient width, ceil(log2(Q))
  localparam int NN     = 2 * N;       // transform length
  localparam int LOGNN  = 9;
  localparam int W_NN   = 7146;        // primitive NN-th root of unity mod Q
  localparam int NN_INV = 7666;        // NN^-1 mod Q
  localparam int QHALF  = Q / 2;       // 3840, message encoding of a one bit

  // RAM geometry: SLOTS polynomial slots of NN words each.
  localparam int SLOTS  = 8;
  localparam int SLOTW  = $clog2(SLOTS);
  localparam int AW     = SLOTW + LOGNN;   // 12 bit RAM address

  typedef logic [QW-1:0] coef_t;
  typedef logic [AW-1:0] addr_t;

  // One RAM port request. Read data comes back one cycle after en && !we.
  typedef struct packed {
    logic  en;
    logic  we;
    addr_t addr;
    coef_t wdata;
  } ram_req_t;

  localparam ram_req_t RAM_IDLE = '{en: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  // Slot numbers of the working polynomials (RAM0 / RAM1).
  localparam logic [SLOTW-1:0] S0_A = 3'd0, S0_P = 3'd1, S0_T1 = 3'd2, S0_T2 = 3'd3,
                               S0_C1 = 3'd4, S0_C2 = 3'd5;
  localparam logic [SLOTW-1:0] S1_E1 = 3'd0, S1_E2 = 3'd1, S1_E3 = 3'd2, S1_M = 3'd3;

  // Unit addressed by the current step of the convolution controller's program.
  typedef enum logic [2:0] {U_END, U_RDR, U_NTT, U_DP, U_PDIV} unit_e;

  // Reader modes and datapath operations (see reader.sv, datapath_ctrl.sv).
  localparam logic [2:0] R_LOAD_COEF = 3'd0, R_LOAD_MSG = 3'd1, R_LOAD_GAUSS = 3'd2,
                         R_STORE_COEF = 3'd3, R_STORE_BITS = 3'd4;
  localparam logic [1:0] DP_PMUL = 2'd0, DP_ADD = 2'd1, DP_SUB = 2'd2;

  // One step of the controller's program.
  typedef struct packed {
    unit_e            unit;
    logic             ram;    // RAM used by reader / NTT: 0 = RAM0, 1 = RAM1
    logic [2:0]       rmode;  // reader mode
    logic             brev;   // reader: bit-reversed load with zero padding
    logic [1:0]       dpop;   // datapath operation
    logic [SLOTW-1:0] sx;
    logic [SLOTW-1:0] sy;
    logic [SLOTW-1:0] sz;
    logic             dst;    // datapath result RAM
  } uinstr_t;

  typedef enum logic [1:0] {OP_KEYGEN = 2'd0, OP_ENCRYPT = 2'd1, OP_DECRYPT = 2'd2} rlwe_op_e;

  function automatic int modpow(input int b, input int e);
    longint r, x;
    r = 1;
    x = longint'(b);
    for (int i = 0; i < 32; i++) begin
      if (e[i]) r = (r * x) % longint'(Q);
      x = (x * x) % longint'(Q);
    end
    return int'(r);
  endfunction

  function automatic logic [LOGNN-1:0] bitrev(input logic [LOGNN-1:0] x);
    for (int i = 0; i < LOGNN; i++) bitrev[i] = x[LOGNN-1-i];
  endfunction

  // Offline voltage calibration. cp_ps: critical path of each component in ps,
  // part: partition index of each component. Returns VP_k in mV for partition k:
  // CP_k = mean critical path of partition k, T = sum CP_k,
  // VP_k = VMIN + CP_k * (VMAX - VMIN) / T.
  localparam int NCOMP = 14;
  localparam int MAXP  = 8;
  typedef int comp_vec_t [NCOMP];
  typedef int part_vec_t [MAXP];

  function automatic part_vec_t calib_mv(input comp_vec_t cp_ps, input comp_vec_t part,
                                         input int nparts, input int vmin_mv, input int vmax_mv);
    longint sum [MAXP];
    longint cnt [MAXP];
    longint cpk [MAXP];
    longint tot;
    part_vec_t v;
    tot = 0;
    for (int k = 0; k < MAXP; k++) begin sum[k] = 0; cnt[k] = 0; cpk[k] = 0; v[k] = vmin_mv; end
    for (int i = 0; i < NCOMP; i++) begin
      sum[part[i]] += longint'(cp_ps[i]);
      cnt[part[i]] += 1;
    end
    for (int k = 0; k < nparts; k++) begin
      // averages scaled by lcm(1..14) = 360360, so the division by N(k) is exact
      if (cnt[k] != 0) cpk[k] = (sum[k] * 360360) / cnt[k];
      tot += cpk[k];
    end
    for (int k = 0; k < nparts; k++)
      if (tot != 0) v[k] = vmin_mv + int'((cpk[k] * (longint'(vmax_mv) - longint'(vmin_mv))) / tot);
    return v;
  endfunction

endpackage
