// poly_div: polynomial divider, brings a product back into R_q = Z_q[x]/(x^N + 1).
//
// Input: slot sx of RAM0 holds the output R of the forward NTT applied to a
// bit-reversed, NN^-1 scaled spectrum, so R[k] = c[-k mod NN] where c is the linear
// product (degree up to 2N-2) of two polynomials. Dividing c by x^N + 1 leaves the
// remainder out[i] = c[i] - c[i+N] = R[-i mod NN] - R[(N - i) mod NN], i = 0..N-1.
// Both words are read in one clock on ports A and B, the difference is formed by a
// sub_mod and written to slot sz (natural order) through port A the next clock:
// 2 clocks per coefficient, 2N + 1 clocks per call, then `done` pulses.
// The paper gives the divider's purpose only; folding with x^N = -1 is this design's
// choice. sz may equal sx only if no later read needs the overwritten words, so the
// accelerator always uses a different slot.
module poly_div
  import rlwe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [SLOTW-1:0] sx,
  input  logic [SLOTW-1:0] sz,
  output logic             busy,
  output logic             done,
  output ram_req_t         req_a,
  output ram_req_t         req_b,
  input  coef_t            rdata_a,
  input  coef_t            rdata_b
);
  typedef enum logic [1:0] {P_IDLE, P_RD, P_WR} pstate_e;
  pstate_e st;

  logic [SLOTW-1:0] sx_q, sz_q;
  logic [LOGNN-1:0] i;
  logic [LOGNN-1:0] ia, ib;
  coef_t            diff;

  sub_mod u_sub (.a(rdata_a), .b(rdata_b), .y(diff));

  assign ia   = LOGNN'(0) - i;
  assign ib   = LOGNN'(N) - i;
  assign busy = (st != P_IDLE);

  always_comb begin
    req_a = RAM_IDLE;
    req_b = RAM_IDLE;
    if (st == P_RD) begin
      req_a = '{en: 1'b1, we: 1'b0, addr: {sx_q, ia}, wdata: '0};
      req_b = '{en: 1'b1, we: 1'b0, addr: {sx_q, ib}, wdata: '0};
    end else if (st == P_WR) begin
      req_a = '{en: 1'b1, we: 1'b1, addr: {sz_q, i}, wdata: diff};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= P_IDLE;
      done <= 1'b0;
      sx_q <= '0;
      sz_q <= '0;
      i    <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        P_IDLE: if (start) begin
          sx_q <= sx;
          sz_q <= sz;
          i    <= '0;
          st   <= P_RD;
        end
        P_RD: st <= P_WR;
        P_WR: begin
          if (i == LOGNN'(N - 1)) begin
            st   <= P_IDLE;
            done <= 1'b1;
          end else begin
            i  <= i + 1'b1;
            st <= P_RD;
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
