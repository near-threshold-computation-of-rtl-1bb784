// poly_mul: modular arithmetic core of the NTT based polynomial multiplier.
//
// Combinational. prod = w * v mod Q is the one modular multiplication of the unit;
// sum = u + prod and diff = u - prod mod Q complete a Cooley-Tukey butterfly. The NTT
// controller uses the butterfly outputs (and prod for the twiddle update), the
// datapath controller uses prod for the point-wise product of two transformed
// polynomials. Two instances exist in the accelerator. The paper states only that the
// multiplier is FFT based; the butterfly form and the use of a plain modulo reduction
// are this design's choice.
module poly_mul
  import rlwe_pkg::*;
(
  input  coef_t u,
  input  coef_t v,
  input  coef_t w,
  output coef_t prod,
  output coef_t sum,
  output coef_t diff
);
  logic [2*QW-1:0] p;
  logic [QW:0]     s;
  logic [QW:0]     dd;

  always_comb begin
    p    = w * v;
    prod = coef_t'(p % (2*QW)'(Q));
    s    = {1'b0, u} + {1'b0, prod};
    sum  = (s >= (QW+1)'(Q)) ? coef_t'(s - (QW+1)'(Q)) : coef_t'(s);
    dd   = {1'b0, u} + (QW+1)'(Q) - {1'b0, prod};
    diff = (dd >= (QW+1)'(Q)) ? coef_t'(dd - (QW+1)'(Q)) : coef_t'(dd);
  end
endmodule
