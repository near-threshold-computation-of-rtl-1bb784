// distance: distance register and subtracter of the Knuth-Yao random walk.
//
// d is the distance between the visited node and the right-most intermediate node of
// the discrete distribution generating tree. At the start of every column the walk goes
// one level down: d <= 2d + r, r a fresh random bit (`col_start`). For every scanned
// row the matrix bit is subtracted (`step`, d <= d - pbit). When the difference becomes
// negative the walk has hit a terminal node: `hit` is raised in that same cycle and the
// sampling is complete (the row counter then holds the sample). `clear` zeroes d.
// The recurrence is the Knuth-Yao column-scan algorithm; the 9-bit signed width is this
// design's choice (d never exceeds twice the column length, 2*55+1).
module distance (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              col_start,
  input  logic              rbit,
  input  logic              step,
  input  logic              pbit,
  output logic signed [8:0] d,
  output logic              hit
);
  logic signed [8:0] diff;

  assign diff = d - 9'(pbit);
  assign hit  = step && (diff < 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         d <= '0;
    else if (clear)     d <= '0;
    else if (col_start) d <= (d <<< 1) + 9'(rbit);
    else if (step)      d <= diff;
  end
endmodule
