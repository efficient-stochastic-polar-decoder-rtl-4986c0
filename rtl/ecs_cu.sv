// ecs_cu: unidirectional computing unit (CU), the unsimplified "Original" type.
//
//   out1 = GM(FM(a, c), b)        out2 = FM(GM(d, b), c)
//
// b feeds both G modules and c both F modules. Used for L messages with
// a = R_{i,j}, b = L_{i+1,2j}, c = L_{i+1,2j-1}, d = R_{i,j+N/2}, giving
// out1 = L_{i,j+N/2} and out2 = L_{i,j} (eq. (2)-(3)); used for R messages with
// a = L_{i+1,2j-1}, b = R_{i,j+N/2}, c = R_{i,j}, d = L_{i+1,2j}, giving
// out1 = R_{i+1,2j} and out2 = R_{i+1,2j-1} (eq. (4)-(5)). The structure is the
// paper's; the mapping of the four ports to messages was read from its equations.
//
// Timing: both outputs are combinational from the two tracker registers, R(t) and
// the inputs (through the F modules); the callers register the outputs.
module ecs_cu
  import ecs_pkg::*;
#(
  parameter int unsigned PT_W    = 6,
  parameter int unsigned ALPHA_M = 2,
  parameter int unsigned R_W     = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic [R_W-1:0] r,
  input  sbit_t          a,
  input  sbit_t          b,
  input  sbit_t          c,
  input  sbit_t          d,
  output sbit_t          out1,
  output sbit_t          out2
);
  sbit_t f_top, g_bot;

  ecs_fm u_fm_top (.x(a), .y(c), .z(f_top));
  ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_top (
    .clk, .rst_n, .clr, .x(f_top), .y(b), .r, .z(out1)
  );
  ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_bot (
    .clk, .rst_n, .clr, .x(d), .y(b), .r, .z(g_bot)
  );
  ecs_fm u_fm_bot (.x(g_bot), .y(c), .z(out2));
endmodule
