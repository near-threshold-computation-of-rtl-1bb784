// sub_mod: coefficient subtracter modulo Q.
//
// Combinational: y = (a - b) mod Q for a, b in [0, Q). As the paper puts it, the
// negative operand is complemented: y = a + (Q - b), less Q when that reaches Q.
// Used by the polynomial divider (folding mod x^N + 1) and for the key generation
// subtraction p = r1 - a*r2.
module sub_mod
  import rlwe_pkg::*;
(
  input  coef_t a,
  input  coef_t b,
  output coef_t y
);
  logic [QW:0] s;
  always_comb begin
    s = {1'b0, a} + ((QW+1)'(Q) - {1'b0, b});
    y = (s >= (QW+1)'(Q)) ? coef_t'(s - (QW+1)'(Q)) : coef_t'(s);
  end
endmodule
