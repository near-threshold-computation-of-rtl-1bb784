// poly_add: coefficient adder modulo Q.
//
// Combinational: y = (a + b) mod Q for a, b in [0, Q). The datapath controller reads
// the two polynomials from RAM and feeds them through this adder one coefficient at a
// time, as the paper describes.
module poly_add
  import rlwe_pkg::*;
(
  input  coef_t a,
  input  coef_t b,
  output coef_t y
);
  logic [QW:0] s;
  always_comb begin
    s = {1'b0, a} + {1'b0, b};
    y = (s >= (QW+1)'(Q)) ? coef_t'(s - (QW+1)'(Q)) : coef_t'(s);
  end
endmodule
