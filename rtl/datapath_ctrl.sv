// datapath_ctrl: datapath controller, coefficient-wise passes over two RAM polynomials.
//
// Holds the paper's three datapath units: a polynomial multiplier (point-wise product
// of two transformed polynomials), the polynomial adder and the polynomial subtracter.
// Operand X is read from RAM0 (port A, slot sx), operand Y from RAM1 (port A, slot sy),
// the result goes to slot sz of RAM0 or RAM1 (dst) through that RAM's port A.
//   DP_PMUL: Z[bitrev(i)] = X[i] * Y[i] * NN^-1, i = 0..511. The bit-reversed write
//            prepares Z for the forward NTT that then acts as the inverse transform;
//            NN^-1 is the inverse transform's scaling.
//   DP_ADD:  Z[i] = X[i] + Y[i], i = 0..255
//   DP_SUB:  Z[i] = Y[i] - X[i], i = 0..255 (RAM1 operand minus RAM0 operand)
// Timing per coefficient: read, execute, write (3 clocks); PMUL needs a second
// multiply clock (4 clocks). `done` pulses once at the end. Z may equal X or Y.
// The split into these operations and the RAM assignment are this design's choice.
module datapath_ctrl
  import rlwe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [1:0]       op,       // 0: PMUL, 1: ADD, 2: SUB
  input  logic [SLOTW-1:0] sx,
  input  logic [SLOTW-1:0] sy,
  input  logic [SLOTW-1:0] sz,
  input  logic             dst,      // 0: RAM0, 1: RAM1
  output logic             busy,
  output logic             done,
  output ram_req_t         req0,
  output ram_req_t         req1,
  input  coef_t            rdata0,
  input  coef_t            rdata1,
  output coef_t            obs_add
);
  typedef enum logic [2:0] {D_IDLE, D_RD, D_EX, D_EX2, D_WR} dstate_e;
  dstate_e st;

  logic [1:0]       op_q;
  logic [SLOTW-1:0] sx_q, sy_q, sz_q;
  logic             dst_q;
  logic [LOGNN:0]   i;
  coef_t            res;
  coef_t            mul_a, mul_b, prod, add_y, sub_y, mul_sum, mul_diff;
  logic [LOGNN-1:0] waddr;
  logic             last;

  // Only the product output of the multiplier is used here; its butterfly
  // sum/difference outputs serve the NTT controller and stay unread.
  poly_mul u_mul (.u('0), .v(mul_b), .w(mul_a), .prod, .sum(mul_sum), .diff(mul_diff));
  poly_add u_add (.a(rdata0), .b(rdata1), .y(add_y));
  sub_mod  u_sub (.a(rdata1), .b(rdata0), .y(sub_y));

  assign mul_a   = (st == D_EX2) ? res : rdata0;
  assign mul_b   = (st == D_EX2) ? coef_t'(NN_INV) : rdata1;
  assign busy    = (st != D_IDLE);
  assign obs_add = add_y;
  assign waddr   = (op_q == DP_PMUL) ? bitrev(i[LOGNN-1:0]) : i[LOGNN-1:0];
  assign last    = (op_q == DP_PMUL) ? (i == (LOGNN+1)'(NN - 1)) : (i == (LOGNN+1)'(N - 1));

  always_comb begin
    req0 = RAM_IDLE;
    req1 = RAM_IDLE;
    if (st == D_RD) begin
      req0 = '{en: 1'b1, we: 1'b0, addr: {sx_q, i[LOGNN-1:0]}, wdata: '0};
      req1 = '{en: 1'b1, we: 1'b0, addr: {sy_q, i[LOGNN-1:0]}, wdata: '0};
    end else if (st == D_WR) begin
      if (dst_q) req1 = '{en: 1'b1, we: 1'b1, addr: {sz_q, waddr}, wdata: res};
      else       req0 = '{en: 1'b1, we: 1'b1, addr: {sz_q, waddr}, wdata: res};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      done  <= 1'b0;
      op_q  <= '0;
      sx_q  <= '0;
      sy_q  <= '0;
      sz_q  <= '0;
      dst_q <= 1'b0;
      i     <= '0;
      res   <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          op_q  <= op;
          sx_q  <= sx;
          sy_q  <= sy;
          sz_q  <= sz;
          dst_q <= dst;
          i     <= '0;
          st    <= D_RD;
        end
        D_RD: st <= D_EX;
        D_EX: begin
          unique case (op_q)
            DP_PMUL: begin res <= prod;  st <= D_EX2; end
            DP_ADD:  begin res <= add_y; st <= D_WR;  end
            default: begin res <= sub_y; st <= D_WR;  end
          endcase
        end
        D_EX2: begin
          res <= prod;
          st  <= D_WR;
        end
        D_WR: begin
          if (last) begin
            st   <= D_IDLE;
            done <= 1'b1;
          end else begin
            i  <= i + 1'b1;
            st <= D_RD;
          end
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
