// kyrom: ROM holding the Knuth-Yao probability matrix of the discrete Gaussian sampler.
//
// One word per matrix column j (COLS = 90 columns, i.e. 90 bits of precision). Bits
// [ROWS-1:0] of a word are the column bits P[row][j] for rows 0..54 (the sample
// magnitudes; 55 rows cover about 12 sigma for sigma = 11.32/sqrt(2*pi) = 4.52).
// Bits [ROWS+DW-1:ROWS] hold delta_j, the growth of the column length between column
// j-1 and j, which drives the row column controller's column_length up counter.
// The table is kyrom.hex. Row x holds the binary expansion, truncated to 90 bits, of
// P(|X| = x): rho(0)/S for x = 0 and 2*rho(x)/S for x > 0, with
// rho(x) = exp(-x^2 / (2 sigma^2)) and S = sum of rho over all integers.
// col_len[j] = 1 + highest row with a one in columns 0..j, delta_j = col_len[j] - col_len[j-1].
// The paper names the ROM and the Knuth-Yao method; rows, precision and word layout are
// this design's choice. Read latency: one clock (registered output).
module kyrom #(
  parameter int    ROWS      = 55,
  parameter int    COLS      = 90,
  parameter int    DW        = 6,
  parameter string INIT_FILE = "rtl/kyrom.hex"
) (
  input  logic                       clk,
  input  logic [$clog2(COLS)-1:0]    addr,
  output logic [ROWS+DW-1:0]         data
);
  logic [ROWS+DW-1:0] mem [COLS];

  initial $readmemh(INIT_FILE, mem);

  always_ff @(posedge clk) data <= mem[addr];
endmodule
