// conv_ctrl: convolution controller, the sequencer of the accelerator.
//
// Decides, step by step, which unit runs next: the reader (load or store a
// polynomial), the NTT controller, the datapath controller (point-wise multiplication,
// addition or subtraction) or the polynomial divider. Each operation is a short fixed
// program (function `prog`) of such steps; a step is started with a one-clock start
// pulse and the controller waits for that unit's done pulse before the next step.
// While a step runs, `cur` names it, so the top level can give that unit the RAM ports.
//
// Programs (slots as in rlwe_pkg; "br" = bit-reversed load, zero padded):
//   KEYGEN : load a (RAM0.A, br), r2 (RAM1.E1, br); sample r1 (RAM1.E2);
//            NTT a, NTT r2; T1 = a.r2; NTT T1; C1 = T1 mod (x^N+1); C1 = r1 - C1;
//            store C1 (public key p = r1 - a*r2)
//   ENCRYPT: load a, p (RAM0, br), message bits (RAM1.M); sample e1 (br), e2, e3;
//            NTT a, p, e1; T1 = a.e1, T2 = p.e1; NTT T1, T2; C1, C2 = fold(T1, T2);
//            C1 += e2; C2 += e3; C2 += m~; store C1, C2
//   DECRYPT: load c1 (RAM0.A, br), r2 (RAM1.E1, br), c2 (RAM1.E2);
//            NTT c1, r2; T1 = c1.r2; NTT T1; C1 = fold(T1); C1 += c2; store decoded C1
// The paper states that this controller chooses between addition and multiplication
// and drives the datapath controller; the programs are this design's.
module conv_ctrl
  import rlwe_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  rlwe_op_e op,
  output logic     busy,
  output logic     done,
  output uinstr_t  cur,
  output logic     rdr_start,
  output logic     ntt_start,
  output logic     dp_start,
  output logic     pd_start,
  input  logic     rdr_done,
  input  logic     ntt_done,
  input  logic     dp_done,
  input  logic     pd_done,
  output logic [4:0] pc
);
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cstate_e;
  cstate_e  st;
  rlwe_op_e op_q;

  function automatic uinstr_t mk(unit_e u, logic ram, logic [2:0] rm, logic br, logic [1:0] dop,
                                 logic [SLOTW-1:0] x, logic [SLOTW-1:0] y, logic [SLOTW-1:0] z,
                                 logic dst);
    uinstr_t i;
    i.unit = u; i.ram = ram; i.rmode = rm; i.brev = br; i.dpop = dop;
    i.sx = x; i.sy = y; i.sz = z; i.dst = dst;
    return i;
  endfunction

  function automatic uinstr_t ld(logic ram, logic [2:0] rm, logic br, logic [SLOTW-1:0] s);
    return mk(U_RDR, ram, rm, br, DP_PMUL, s, '0, '0, 1'b0);
  endfunction
  function automatic uinstr_t ntt(logic ram, logic [SLOTW-1:0] s);
    return mk(U_NTT, ram, R_LOAD_COEF, 1'b0, DP_PMUL, s, '0, '0, 1'b0);
  endfunction
  function automatic uinstr_t dp(logic [1:0] dop, logic [SLOTW-1:0] x, logic [SLOTW-1:0] y,
                                 logic [SLOTW-1:0] z);
    return mk(U_DP, 1'b0, R_LOAD_COEF, 1'b0, dop, x, y, z, 1'b0);
  endfunction
  function automatic uinstr_t pdv(logic [SLOTW-1:0] x, logic [SLOTW-1:0] z);
    return mk(U_PDIV, 1'b0, R_LOAD_COEF, 1'b0, DP_PMUL, x, '0, z, 1'b0);
  endfunction

  function automatic uinstr_t prog(rlwe_op_e o, logic [4:0] p);
    uinstr_t e;
    e = mk(U_END, 1'b0, R_LOAD_COEF, 1'b0, DP_PMUL, '0, '0, '0, 1'b0);
    unique case (o)
      OP_KEYGEN: unique case (p)
        5'd0: e = ld(1'b0, R_LOAD_COEF, 1'b1, S0_A);
        5'd1: e = ld(1'b1, R_LOAD_COEF, 1'b1, S1_E1);
        5'd2: e = ld(1'b1, R_LOAD_GAUSS, 1'b0, S1_E2);
        5'd3: e = ntt(1'b0, S0_A);
        5'd4: e = ntt(1'b1, S1_E1);
        5'd5: e = dp(DP_PMUL, S0_A, S1_E1, S0_T1);
        5'd6: e = ntt(1'b0, S0_T1);
        5'd7: e = pdv(S0_T1, S0_C1);
        5'd8: e = dp(DP_SUB, S0_C1, S1_E2, S0_C1);
        5'd9: e = ld(1'b0, R_STORE_COEF, 1'b0, S0_C1);
        default: ;
      endcase
      OP_ENCRYPT: unique case (p)
        5'd0:  e = ld(1'b0, R_LOAD_COEF, 1'b1, S0_A);
        5'd1:  e = ld(1'b0, R_LOAD_COEF, 1'b1, S0_P);
        5'd2:  e = ld(1'b1, R_LOAD_MSG, 1'b0, S1_M);
        5'd3:  e = ld(1'b1, R_LOAD_GAUSS, 1'b1, S1_E1);
        5'd4:  e = ld(1'b1, R_LOAD_GAUSS, 1'b0, S1_E2);
        5'd5:  e = ld(1'b1, R_LOAD_GAUSS, 1'b0, S1_E3);
        5'd6:  e = ntt(1'b0, S0_A);
        5'd7:  e = ntt(1'b0, S0_P);
        5'd8:  e = ntt(1'b1, S1_E1);
        5'd9:  e = dp(DP_PMUL, S0_A, S1_E1, S0_T1);
        5'd10: e = dp(DP_PMUL, S0_P, S1_E1, S0_T2);
        5'd11: e = ntt(1'b0, S0_T1);
        5'd12: e = ntt(1'b0, S0_T2);
        5'd13: e = pdv(S0_T1, S0_C1);
        5'd14: e = pdv(S0_T2, S0_C2);
        5'd15: e = dp(DP_ADD, S0_C1, S1_E2, S0_C1);
        5'd16: e = dp(DP_ADD, S0_C2, S1_E3, S0_C2);
        5'd17: e = dp(DP_ADD, S0_C2, S1_M, S0_C2);
        5'd18: e = ld(1'b0, R_STORE_COEF, 1'b0, S0_C1);
        5'd19: e = ld(1'b0, R_STORE_COEF, 1'b0, S0_C2);
        default: ;
      endcase
      OP_DECRYPT: unique case (p)
        5'd0: e = ld(1'b0, R_LOAD_COEF, 1'b1, S0_A);
        5'd1: e = ld(1'b1, R_LOAD_COEF, 1'b1, S1_E1);
        5'd2: e = ld(1'b1, R_LOAD_COEF, 1'b0, S1_E2);
        5'd3: e = ntt(1'b0, S0_A);
        5'd4: e = ntt(1'b1, S1_E1);
        5'd5: e = dp(DP_PMUL, S0_A, S1_E1, S0_T1);
        5'd6: e = ntt(1'b0, S0_T1);
        5'd7: e = pdv(S0_T1, S0_C1);
        5'd8: e = dp(DP_ADD, S0_C1, S1_E2, S0_C1);
        5'd9: e = ld(1'b0, R_STORE_BITS, 1'b0, S0_C1);
        default: ;
      endcase
      default: ;
    endcase
    return e;
  endfunction

  logic unit_done;
  assign cur  = prog(op_q, pc);
  assign busy = (st != C_IDLE);

  always_comb begin
    unique case (cur.unit)
      U_RDR:   unit_done = rdr_done;
      U_NTT:   unit_done = ntt_done;
      U_DP:    unit_done = dp_done;
      U_PDIV:  unit_done = pd_done;
      default: unit_done = 1'b0;
    endcase
  end

  always_comb begin
    rdr_start = 1'b0;
    ntt_start = 1'b0;
    dp_start  = 1'b0;
    pd_start  = 1'b0;
    if (st == C_ISSUE) begin
      rdr_start = (cur.unit == U_RDR);
      ntt_start = (cur.unit == U_NTT);
      dp_start  = (cur.unit == U_DP);
      pd_start  = (cur.unit == U_PDIV);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= C_IDLE;
      op_q <= OP_KEYGEN;
      pc   <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          op_q <= op;
          pc   <= '0;
          st   <= C_ISSUE;
        end
        C_ISSUE: begin
          if (cur.unit == U_END) begin
            st   <= C_IDLE;
            done <= 1'b1;
          end else st <= C_WAIT;
        end
        C_WAIT: if (unit_done) begin
          pc <= pc + 5'd1;
          st <= C_ISSUE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // A unit's done pulse is only expected while the controller waits for it.
  a_done_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
    (rdr_done || ntt_done || dp_done || pd_done) |-> (st == C_WAIT));
endmodule
