// ecs_rcu: R-message computing unit of one stage, with frozen-bit simplification.
//
// Inputs are R_{i,j} (r_j), R_{i,j+N/2} (r_jn), L_{i+1,2j-1} (l_a), L_{i+1,2j} (l_b);
// outputs are R_{i+1,2j-1} (r_a) and R_{i+1,2j} (r_b), eq. (4)-(5):
//   R_{i+1,2j-1} = f(R_{i,j}, g(L_{i+1,2j}, R_{i,j+N/2}))
//   R_{i+1,2j}   = g(f(R_{i,j}, L_{i+1,2j-1}), R_{i,j+N/2})
// TYPE (fixed per position from the frozen set) selects:
//   CU_ORIG  full CU
//   CU_T1    both R frozen:      both outputs frozen (constant +1 stream, no logic)
//   CU_T2    R_{i,j} frozen:     r_b = GM(l_a, r_jn),  r_a = GM(l_b, r_jn)
//   CU_T3    R_{i,j+N/2} frozen: r_b frozen,           r_a = r_j
// A frozen output is the constant +1 stream, as the paper sets R_1 of frozen bits.
// Unused inputs of a simplified type are left unread on purpose.
//
// Timing: non-frozen outputs are registered (one clock per stage, this design's
// choice); frozen outputs are constants. `clr` zeroes registers and trackers.
module ecs_rcu
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
  output sbit_t          r_a,
  output sbit_t          r_b
);
  sbit_t nx_a, nx_b;
  sbit_t q_a, q_b;

  if (TYPE == CU_ORIG) begin : g_orig
    ecs_cu #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_cu (
      .clk, .rst_n, .clr, .r,
      .a(l_a), .b(r_jn), .c(r_j), .d(l_b), .out1(nx_b), .out2(nx_a)
    );
  end else if (TYPE == CU_T2) begin : g_t2
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_top (
      .clk, .rst_n, .clr, .x(l_a), .y(r_jn), .r, .z(nx_b)
    );
    ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm_bot (
      .clk, .rst_n, .clr, .x(l_b), .y(r_jn), .r, .z(nx_a)
    );
  end else if (TYPE == CU_T3) begin : g_t3
    assign nx_a = r_j;
    assign nx_b = SBIT_FROZEN;
  end else begin : g_t1
    assign nx_a = SBIT_FROZEN;
    assign nx_b = SBIT_FROZEN;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_a <= SBIT_ZERO;
      q_b <= SBIT_ZERO;
    end else if (clr) begin
      q_a <= SBIT_ZERO;
      q_b <= SBIT_ZERO;
    end else begin
      q_a <= nx_a;
      q_b <= nx_b;
    end
  end

  // Frozen outputs bypass the register: they are constants.
  assign r_a = (TYPE == CU_T1) ? SBIT_FROZEN : q_a;
  assign r_b = (TYPE == CU_T1 || TYPE == CU_T3) ? SBIT_FROZEN : q_b;
endmodule
