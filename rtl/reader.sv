// reader: moves polynomials between the outside world and the RAMs.
//
// Load modes write one polynomial into slot `slot` of the RAM the convolution
// controller has connected (req/rdata):
//   R_LOAD_COEF  coefficients from the input stream (in_valid/in_ready/in_data)
//   R_LOAD_MSG   message bits from the input stream (bit 0 of in_data), encoded as
//                m~ = bit * floor(Q/2) = bit * 3840
//   R_LOAD_GAUSS error coefficients from the Gaussian sampler stream (g_*)
// With brev = 1 the N coefficients are written at bit-reversed addresses of a 512-word
// slot and the upper half is zero padded (NN writes), the input order the NTT expects;
// with brev = 0 they are written in natural order (N writes). One write per clock
// while data is available.
// Store modes read the N coefficients of a slot in natural order onto the output
// stream (out_valid/out_ready/out_data), three clocks per word:
//   R_STORE_COEF the coefficients themselves (cipher text or public key)
//   R_STORE_BITS decoded message bits: 1 when Q/4 < x < 3Q/4, else 0
// The paper gives the reader's loading and message encoding; store/decode here and the
// encoding constant are this design's choice.
module reader
  import rlwe_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [2:0]       mode,
  input  logic [SLOTW-1:0] slot,
  input  logic             brev,
  output logic             busy,
  output logic             done,
  input  logic             in_valid,
  input  coef_t            in_data,
  output logic             in_ready,
  input  logic             g_valid,
  input  coef_t            g_data,
  output logic             g_ready,
  output logic             out_valid,
  output coef_t            out_data,
  input  logic             out_ready,
  output ram_req_t         req,
  input  coef_t            rdata
);
  typedef enum logic [2:0] {RD_IDLE, RD_LOAD, RD_SRD, RD_SCAP, RD_SOUT} rstate_e;
  rstate_e st;

  logic [2:0]       mode_q;
  logic [SLOTW-1:0] slot_q;
  logic             brev_q;
  logic [LOGNN:0]   idx;
  logic             need_data, have_data, wr_now, last;
  coef_t            wval;
  logic [LOGNN-1:0] waddr;

  assign busy      = (st != RD_IDLE);
  assign need_data = (idx < (LOGNN+1)'(N));
  assign have_data = (mode_q == R_LOAD_GAUSS) ? g_valid : in_valid;
  assign wr_now    = (st == RD_LOAD) && (!need_data || have_data);
  assign in_ready  = (st == RD_LOAD) && need_data && (mode_q != R_LOAD_GAUSS);
  assign g_ready   = (st == RD_LOAD) && need_data && (mode_q == R_LOAD_GAUSS);
  assign waddr     = brev_q ? bitrev(idx[LOGNN-1:0]) : idx[LOGNN-1:0];
  assign last      = (st == RD_LOAD && brev_q) ? (idx == (LOGNN+1)'(NN - 1))
                                                 : (idx == (LOGNN+1)'(N - 1));

  always_comb begin
    if (!need_data)                 wval = '0;
    else if (mode_q == R_LOAD_GAUSS) wval = g_data;
    else if (mode_q == R_LOAD_MSG)   wval = in_data[0] ? coef_t'(QHALF) : '0;
    else                             wval = in_data;
  end

  always_comb begin
    req = RAM_IDLE;
    if (wr_now)             req = '{en: 1'b1, we: 1'b1, addr: {slot_q, waddr}, wdata: wval};
    else if (st == RD_SRD)  req = '{en: 1'b1, we: 1'b0, addr: {slot_q, idx[LOGNN-1:0]}, wdata: '0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= RD_IDLE;
      done      <= 1'b0;
      mode_q    <= '0;
      slot_q    <= '0;
      brev_q    <= 1'b0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        RD_IDLE: if (start) begin
          mode_q <= mode;
          slot_q <= slot;
          brev_q <= brev;
          idx    <= '0;
          st     <= (mode == R_STORE_COEF || mode == R_STORE_BITS) ? RD_SRD : RD_LOAD;
        end
        RD_LOAD: if (wr_now) begin
          if (last) begin
            st   <= RD_IDLE;
            done <= 1'b1;
          end else idx <= idx + 1'b1;
        end
        RD_SRD:  st <= RD_SCAP;
        RD_SCAP: begin
          if (mode_q == R_STORE_BITS)
            out_data <= coef_t'((int'(rdata) > Q / 4 && int'(rdata) < (3 * Q + 3) / 4) ? 1 : 0);
          else
            out_data <= rdata;
          out_valid <= 1'b1;
          st        <= RD_SOUT;
        end
        RD_SOUT: if (out_ready) begin
          out_valid <= 1'b0;
          if (last) begin
            st   <= RD_IDLE;
            done <= 1'b1;
          end else begin
            idx <= idx + 1'b1;
            st  <= RD_SRD;
          end
        end
        default: st <= RD_IDLE;
      endcase
    end
  end
endmodule
