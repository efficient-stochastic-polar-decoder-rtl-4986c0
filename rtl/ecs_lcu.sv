// ecs_lcu: L-message computing unit of one stage, with frozen-bit simplification.
//
// Inputs are R_{i,j} (r_j), R_{i,j+N/2} (r_jn), L_{i+1,2j-1} (l_a), L_{i+1,2j} (l_b);
// outputs are L_{i,j} (l_j) and L_{i,j+N/2} (l_jn), eq. (2)-(3):
//   L_{i,j}     = f(L_{i+1,2j-1}, g(L_{i+1,2j}, R_{i,j+N/2}))
//   L_{i,j+N/2} = g(f(R_{i,j}, L_{i+1,2j-1}), L_{i+1,2j})
// A frozen R input is an infinitely reliable "0", so f(inf, x) = x and g(x, inf) = inf
// let logic drop out. TYPE (fixed per position from the frozen set) selects:
//   CU_ORIG  full CU (two FMs, two GMs)
//   CU_T1    both R frozen:   l_jn = GM(l_b, l_a),          l_j = l_a
//   CU_T2    R_{i,j} frozen:  l_jn = GM(l_a, l_b),          l_j = FM(GM(l_b, r_jn), l_a)
//   CU_T3    R_{i,j+N/2} frozen: l_jn = GM(FM(r_j, l_a), l_b), l_j = l_a
// The simplified types are the paper's; for Type II its drawing feeds the upper GM from
// the frozen R_{i,j} row, and this design follows the equation instead.
// Unused inputs of a simplified type are left unread on purpose.
//
// Timing: both outputs are registered (one clock per stage, the pipelining is this
// design's choice); `clr` zeroes the registers and trackers for a new frame.
module ecs_lcu
  import ecs_pkg::*;
#(
  parameter cu_type_e    TYPE    = CU_ORIG,
  parameter int unsigned PT_W    = 6,
  parameter int unsigned ALPHA_M = 2,
  parameter int unsigned R_W     = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic [R_W-1:0] r,
  input  sbit_t          r_j,
  input  sbit_t          r_jn,
  input  sbit_t          l_a,
  input  sbit_t          l_b,
  output sbit_t          l_j,
  output sbit_t          l_jn
);
  sbit_t nx_j, nx_jn;

  if (TYPE == CU_ORIG) begin : g_orig
    ecs_cu #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_cu (
      .clk, .rst_n, .clr, .r,
      .a(r_j), .b(l_b), .c(l_a), .d(r_jn), .out1(nx_jn), .out2(nx_j)
    );
  end else if (TYPE == CU_T1) begin : g_t1
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm (
      .clk, .rst_n, .clr, .x(l_b), .y(l_a), .r, .z(nx_jn)
    );
    assign nx_j = l_a;
  end else if (TYPE == CU_T2) begin : g_t2
    sbit_t g_b;
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_top (
      .clk, .rst_n, .clr, .x(l_a), .y(l_b), .r, .z(nx_jn)
    );
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_bot (
      .clk, .rst_n, .clr, .x(r_jn), .y(l_b), .r, .z(g_b)
    );
    ecs_fm u_fm (.x(g_b), .y(l_a), .z(nx_j));
  end else begin : g_t3
    sbit_t f_a;
    ecs_fm u_fm (.x(r_j), .y(l_a), .z(f_a));
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm (
      .clk, .rst_n, .clr, .x(f_a), .y(l_b), .r, .z(nx_jn)
    );
    assign nx_j = l_a;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_j  <= SBIT_ZERO;
      l_jn <= SBIT_ZERO;
    end else if (clr) begin
      l_j  <= SBIT_ZERO;
      l_jn <= SBIT_ZERO;
    end else begin
      l_j  <= nx_j;
      l_jn <= nx_jn;
    end
  end
endmodule
