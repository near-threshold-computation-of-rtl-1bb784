// razor_ff: Razor timing-error detecting register.
//
// The main register R samples d on the rising edge of clk. The shadow register S
// samples the same d on the rising edge of dclk, a copy of clk delayed by T_del
// (generated outside this module). Data that changes after R has sampled but before S
// samples (a path made late by a lowered supply voltage) leaves R and S different;
// the flag F (`err`) is set at the next clk edge and stays for one cycle per mismatch.
// R's value (`q`) is passed on unchanged: the design detects errors and raises the
// partition voltage, it does not replay. Main/shadow registers, delayed clock and the
// mismatch flag follow the paper's description and its timing diagram; registering F
// on clk is this design's choice. Both clocks are edge-sampled; no other timing is
// assumed.
module razor_ff #(
  parameter int W = 13
) (
  input  logic         clk,
  input  logic         dclk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q,
  output logic         err
);
  logic [W-1:0] s;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) q <= '0;
    else        q <= d;

  always_ff @(posedge dclk or negedge rst_n)
    if (!rst_n) s <= '0;
    else        s <= d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) err <= 1'b0;
    else        err <= (q != s);
endmodule
