// ntt_ctrl: NTT controller, in-place forward number theoretic transform in one RAM.
//
// Transforms the NN = 512-word polynomial in slot `slot` of the RAM it is connected
// to: X[k] = sum_j x[j] * W^(jk) mod Q, W = W_NN. Iterative radix-2 Cooley-Tukey with
// the input in bit-reversed order and the output in natural order (the reader stores
// coefficients at bit-reversed addresses, so no permutation pass is needed). Stages
// s = 1..9 use the stage root W^(NN >> s), taken from a table computed at elaboration;
// inside a stage the twiddle loop is outermost so each twiddle factor is produced once,
// by one multiplication with the stage root, instead of being stored.
// The same forward transform also serves as the inverse: applied to a spectrum stored
// in bit-reversed order it returns NN * x[-k mod NN], which the datapath and the
// polynomial divider account for.
//
// Timing: a butterfly takes two clocks (read both operands on ports A and B, then write
// both results), a twiddle update one clock: 9*256*2 + 511 = 5119 clocks per transform
// plus two for start and done. `done` pulses for one clock at the end.
// The paper says only that this controller performs the NTT; the algorithm choices
// above are this design's.
module ntt_ctrl
  import rlwe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [SLOTW-1:0] slot,
  output logic             busy,
  output logic             done,
  output ram_req_t         req_a,
  output ram_req_t         req_b,
  input  coef_t            rdata_a,
  input  coef_t            rdata_b,
  output coef_t            obs_bf
);
  typedef enum logic [1:0] {N_IDLE, N_RD, N_BF, N_TW} nstate_e;
  nstate_e st;

  typedef coef_t root_tab_t [LOGNN+1];
  function automatic root_tab_t mk_roots();
    root_tab_t t;
    for (int s = 0; s <= LOGNN; s++) t[s] = coef_t'(modpow(W_NN, NN >> s));
    return t;
  endfunction
  localparam root_tab_t ROOTS = mk_roots();

  logic [SLOTW-1:0] base;
  logic [3:0]       stage;
  logic [LOGNN:0]   half;      // 1 .. 256
  logic [LOGNN:0]   j;
  logic [LOGNN:0]   k;
  coef_t            w, wm;
  coef_t            pm_v, pm_w, prod, bsum, bdiff;
  logic [LOGNN:0]   k_next;

  poly_mul u_bfly (.u(rdata_a), .v(pm_v), .w(pm_w), .prod, .sum(bsum), .diff(bdiff));

  assign pm_v   = (st == N_TW) ? wm : rdata_b;
  assign pm_w   = w;
  assign k_next = k + (half << 1);
  assign busy   = (st != N_IDLE);
  assign obs_bf = bsum;

  always_comb begin
    req_a = RAM_IDLE;
    req_b = RAM_IDLE;
    if (st == N_RD) begin
      req_a = '{en: 1'b1, we: 1'b0, addr: {base, k[LOGNN-1:0]},          wdata: '0};
      req_b = '{en: 1'b1, we: 1'b0, addr: {base, k[LOGNN-1:0] + half[LOGNN-1:0]}, wdata: '0};
    end else if (st == N_BF) begin
      req_a = '{en: 1'b1, we: 1'b1, addr: {base, k[LOGNN-1:0]},          wdata: bsum};
      req_b = '{en: 1'b1, we: 1'b1, addr: {base, k[LOGNN-1:0] + half[LOGNN-1:0]}, wdata: bdiff};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= N_IDLE;
      done  <= 1'b0;
      base  <= '0;
      stage <= '0;
      half  <= '0;
      j     <= '0;
      k     <= '0;
      w     <= '0;
      wm    <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        N_IDLE: if (start) begin
          base  <= slot;
          stage <= 4'd1;
          half  <= 1;
          j     <= '0;
          k     <= '0;
          w     <= coef_t'(1);
          wm    <= ROOTS[1];
          st    <= N_RD;
        end
        N_RD: st <= N_BF;
        N_BF: begin
          if (k_next < (LOGNN+1)'(NN)) begin
            k  <= k_next;
            st <= N_RD;
          end else st <= N_TW;
        end
        N_TW: begin
          if (j + 1'b1 == half) begin
            if (stage == 4'(LOGNN)) begin
              st   <= N_IDLE;
              done <= 1'b1;
            end else begin
              stage <= stage + 4'd1;
              half  <= half << 1;
              j     <= '0;
              k     <= '0;
              w     <= coef_t'(1);
              wm    <= ROOTS[stage + 4'd1];
              st    <= N_RD;
            end
          end else begin
            w  <= prod;
            j  <= j + 1'b1;
            k  <= j + 1'b1;
            st <= N_RD;
          end
        end
        default: st <= N_IDLE;
      endcase
    end
  end
endmodule
