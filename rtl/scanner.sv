// scanner: scans the bits of the current Knuth-Yao ROM word (one matrix column).
//
// `start` points the scanner at column 0 and fetches it; `next_col` moves to the next
// column and fetches that word: the column address changes on the first clock edge,
// the ROM reads on the second and the word is captured on the third, after which
// `word_valid` is high until the next fetch.
// While valid, `pbit` is the matrix bit of row `row` of the held column and `delta`
// the column-length increment stored with it. `last_col` flags the final column.
// Follows the paper's description (read bits of a ROM word, fetch the next word when
// the word is used up); the fetch timing is this design's choice.
module scanner #(
  parameter int ROWS = 55,
  parameter int COLS = 90,
  parameter int DW   = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     next_col,
  output logic [$clog2(COLS)-1:0]  rom_addr,
  input  logic [ROWS+DW-1:0]       rom_data,
  input  logic [5:0]               row,
  output logic                     pbit,
  output logic [DW-1:0]            delta,
  output logic                     word_valid,
  output logic                     last_col
);
  logic [$clog2(COLS)-1:0] col;
  logic [ROWS-1:0]         word;
  logic [1:0]              fetch;   // fetch[0]: address issued, fetch[1]: data on rom_data

  assign rom_addr = col;
  assign last_col = (col == ($clog2(COLS))'(COLS - 1));
  assign pbit     = (int'(row) < ROWS) ? word[row] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col        <= '0;
      word       <= '0;
      delta      <= '0;
      fetch      <= '0;
      word_valid <= 1'b0;
    end else begin
      fetch <= {fetch[0], 1'b0};
      if (start) begin
        col        <= '0;
        fetch      <= 2'b01;
        word_valid <= 1'b0;
      end else if (next_col) begin
        col        <= col + 1'b1;
        fetch      <= 2'b01;
        word_valid <= 1'b0;
      end else if (fetch[1]) begin
        word       <= rom_data[ROWS-1:0];
        delta      <= rom_data[ROWS+DW-1:ROWS];
        word_valid <= 1'b1;
      end
    end
  end
endmodule
