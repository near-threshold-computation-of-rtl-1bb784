// dp_ram: true dual-port RAM for polynomial coefficients.
//
// Two independent ports (A and B) on one clock, each able to read or write one word
// per cycle, so two coefficients move per clock (the butterflies of the NTT read both
// operands in one cycle and write both results in the next). Reads are synchronous:
// rdata is valid the clock after en && !we and shows the old contents when the same
// port writes. If both ports write one address in the same cycle, port B wins.
// Contents are not reset. Depth 4096 x 13 bit holds eight 512-word polynomial slots.
// The paper gives the two dual-port RAMs and their purpose; geometry and collision
// rules are this design's choice.
module dp_ram #(
  parameter int DW = 13,
  parameter int AW = 12
) (
  input  logic          clk,
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [DW-1:0] wdata_a,
  output logic [DW-1:0] rdata_a,
  input  logic          en_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  logic [DW-1:0] wdata_b,
  output logic [DW-1:0] rdata_b
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en_a) begin
      if (we_a) mem[addr_a] <= wdata_a;
      rdata_a <= mem[addr_a];
    end
    if (en_b) begin
      if (we_b) mem[addr_b] <= wdata_b;
      rdata_b <= mem[addr_b];
    end
  end
endmodule
