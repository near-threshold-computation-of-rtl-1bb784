// row_col_ctrl: row column controller of the Knuth-Yao sampler.
//
// Two counters, as the paper describes: the up counter column_length holds the number
// of rows to scan in the current column of the probability matrix, and the down counter
// row_number walks those rows. `clear` starts a new sample (column_length = 0).
// `load` starts a column: column_length grows by the column's `delta` and row_number is
// set to the new column_length. `step` decrements row_number. The row being scanned is
// row_number - 1 (`row`); `col_done` (row_number = 0) ends the column scan. When the
// distance block reports a hit, `row` is the sample magnitude. The off-by-one mapping
// between row_number and the scanned row is this design's choice.
module row_col_ctrl #(
  parameter int DW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          load,
  input  logic [DW-1:0] delta,
  input  logic          step,
  output logic [5:0]    column_length,
  output logic [5:0]    row_number,
  output logic [5:0]    row,
  output logic          col_done
);
  assign row      = row_number - 6'd1;
  assign col_done = (row_number == 6'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      column_length <= '0;
      row_number    <= '0;
    end else if (clear) begin
      column_length <= '0;
      row_number    <= '0;
    end else if (load) begin
      column_length <= column_length + 6'(delta);
      row_number    <= column_length + 6'(delta);
    end else if (step && !col_done) begin
      row_number <= row_number - 6'd1;
    end
  end
endmodule
