// ecs_gm: stochastic g(x,y) = x + y ("G module").
//
// The two incoming stream bits are added (x~ in {-2..2}), a probability tracker
// (ecs_pt) follows the mean of x~, and a new stream is drawn from the tracker value:
// the sign bit is the tracker's sign, and the magnitude bit is 1 when the scaled
// |P| reaches R(t). A tracker value of 1 or more (in magnitude) gives a magnitude bit
// that is always 1, i.e. the result saturates at +-1, the largest stream value.
// The stream rule is the same as the bit stream generator's (eq. (11) of the paper):
// R <= |P| for positive P, R < |P| for negative P, never for P = 0. The paper draws a
// single ">=" comparator; the sign-dependent strictness and the scale (tracker value 1
// = 2^R_W in R units) are this design's choices.
//
// Timing: the output is combinational from the tracker register and R(t); the tracker
// updates once per clock, so a change at the inputs shows in the output one cycle later.
module ecs_gm
  import ecs_pkg::*;
#(
  parameter int unsigned PT_W    = 6,
  parameter int unsigned ALPHA_M = 2,
  parameter int unsigned R_W     = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  sbit_t          x,
  input  sbit_t          y,
  input  logic [R_W-1:0] r,
  output sbit_t          z
);
  logic signed [2:0]      xt;
  logic signed [PT_W-1:0] p;
  logic        [PT_W-1:0] mag;
  // |P| * 2^R_W and R * 2^(n-1) compared on a common scale.
  logic [PT_W+R_W:0]      lhs, rhs;

  assign xt = 3'(sval(x)) + 3'(sval(y));

  ecs_pt #(.PT_W(PT_W), .ALPHA_M(ALPHA_M)) u_pt (
    .clk, .rst_n, .clr, .xt, .p
  );

  always_comb begin
    mag = p[PT_W-1] ? PT_W'(-p) : PT_W'(p);
    lhs = (PT_W+R_W+1)'(mag) << R_W;
    rhs = (PT_W+R_W+1)'(r) << (PT_W - 2);
    z.sgn = p[PT_W-1];
    if (p == '0)         z.sn = 1'b0;
    else if (p[PT_W-1])  z.sn = (rhs < lhs);
    else                 z.sn = (rhs <= lhs);
  end
endmodule
