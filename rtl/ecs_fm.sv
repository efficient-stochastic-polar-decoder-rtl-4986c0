// ecs_fm: stochastic min-sum f() ("F module").
//
// f(x,y) = sign(x)*sign(y)*min(|x|,|y|). With positively correlated streams (all made
// from one random source) the AND of the two magnitude bits has probability
// min(|x|,|y|), and the XOR of the sign bits is the product of the signs. The module is
// one AND gate and one XOR gate, exactly as the paper draws it; it is combinational.
module ecs_fm
  import ecs_pkg::*;
(
  input  sbit_t x,
  input  sbit_t y,
  output sbit_t z
);
  always_comb begin
    z.sn  = x.sn & y.sn;
    z.sgn = x.sgn ^ y.sgn;
  end
endmodule
