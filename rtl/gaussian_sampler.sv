// gaussian_sampler: Knuth-Yao discrete Gaussian sampler (column scanning).
//
// Built, as in the paper, from the ROM (probability matrix), the scanner (bits of the
// current column word), the row column controller (column_length / row_number) and
// the distance block (random walk subtracter). Per sample:
//   d = 0; for each column j: d = 2d + r; for row = col_len[j]-1 downto 0:
//   d = d - P[row][j]; if d < 0 the sample magnitude is row.
// A further random bit gives the sign; the sample leaves as a coefficient mod Q
// (row, or Q - row when negative and row != 0). If all 90 columns pass without a hit
// (probability below 2^-85) the walk restarts; that fallback is this design's choice.
//
// Interface: random bits arrive on rbit with rbit_valid; rbit_take consumes one.
// Samples leave on a valid/ready stream (out_valid/out_ready/out_data). One row is
// scanned per clock, a new column costs three clocks (ROM fetch plus the random bit).
// obs_* expose the row counter, the distance register, the ROM word and the scanner's
// bit for timing-error monitoring.
module gaussian_sampler
  import rlwe_pkg::*;
#(
  parameter int    ROWS      = 55,
  parameter int    COLS      = 90,
  parameter int    DW        = 6,
  parameter string INIT_FILE = "rtl/kyrom.hex"
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rbit,
  input  logic              rbit_valid,
  output logic              rbit_take,
  output logic              out_valid,
  input  logic              out_ready,
  output coef_t             out_data,
  output logic [5:0]        obs_row,
  output logic signed [8:0] obs_dist,
  output logic [ROWS+DW-1:0] obs_rom,
  output logic [1:0]        obs_scan
);
  typedef enum logic [2:0] {G_IDLE, G_COL, G_SCAN, G_SIGN, G_OUT} gstate_e;
  gstate_e st;

  logic [$clog2(COLS)-1:0] rom_addr;
  logic [ROWS+DW-1:0]      rom_data;
  logic                    sc_start, sc_next, pbit, word_valid, last_col;
  logic [DW-1:0]           delta;
  logic                    rc_clear, rc_load, rc_step, col_done;
  // column_length is internal to the counter pair; the sampler only needs row/col_done.
  logic [5:0]              column_length, row_number, row;
  logic                    d_clear, d_col, d_step, hit;
  logic signed [8:0]       d;
  logic [5:0]              mag;

  kyrom #(.ROWS(ROWS), .COLS(COLS), .DW(DW), .INIT_FILE(INIT_FILE)) u_rom (
    .clk, .addr(rom_addr), .data(rom_data));

  scanner #(.ROWS(ROWS), .COLS(COLS), .DW(DW)) u_scan (
    .clk, .rst_n, .start(sc_start), .next_col(sc_next), .rom_addr, .rom_data,
    .row, .pbit, .delta, .word_valid, .last_col);

  row_col_ctrl #(.DW(DW)) u_rc (
    .clk, .rst_n, .clear(rc_clear), .load(rc_load), .delta, .step(rc_step),
    .column_length, .row_number, .row, .col_done);

  distance u_dist (
    .clk, .rst_n, .clear(d_clear), .col_start(d_col), .rbit, .step(d_step), .pbit,
    .d, .hit);

  assign obs_row  = row_number;
  assign obs_dist = d;
  assign obs_rom  = rom_data;
  assign obs_scan = {word_valid, pbit};

  always_comb begin
    sc_start  = 1'b0;
    sc_next   = 1'b0;
    rc_clear  = 1'b0;
    rc_load   = 1'b0;
    rc_step   = 1'b0;
    d_clear   = 1'b0;
    d_col     = 1'b0;
    d_step    = 1'b0;
    rbit_take = 1'b0;
    unique case (st)
      G_IDLE: begin
        sc_start = 1'b1;
        rc_clear = 1'b1;
        d_clear  = 1'b1;
      end
      G_COL: if (word_valid && rbit_valid) begin
        d_col     = 1'b1;
        rc_load   = 1'b1;
        rbit_take = 1'b1;
      end
      G_SCAN: begin
        if (col_done) begin
          if (!last_col) sc_next = 1'b1;
        end else begin
          d_step = 1'b1;
          if (!hit) rc_step = 1'b1;
        end
      end
      G_SIGN: rbit_take = rbit_valid;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= G_IDLE;
      mag       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      unique case (st)
        G_IDLE:  st <= G_COL;
        G_COL:   if (word_valid && rbit_valid) st <= G_SCAN;
        G_SCAN: begin
          if (col_done) st <= last_col ? G_IDLE : G_COL;
          else if (hit) begin
            mag <= row;
            st  <= G_SIGN;
          end
        end
        G_SIGN: if (rbit_valid) begin
          out_data  <= (rbit && mag != 6'd0) ? coef_t'(Q - int'(mag)) : coef_t'(mag);
          out_valid <= 1'b1;
          st        <= G_OUT;
        end
        G_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          st        <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
