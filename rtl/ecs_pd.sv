// ecs_pd: efficient correlated stochastic polar decoder (top level).
//
// Belief-propagation decoding of an (N, K) polar code with min-sum messages carried
// as signed stochastic streams. One Sobol source R(t) feeds every comparator, so all
// streams are positively correlated and min() is a single AND gate. Blocks:
//   ecs_sobol_gen    shared R(t)
//   ecs_bsg          channel values -> L_{n+1} streams
//   ecs_msg_update   n stages of LCUs and RCUs (frozen-simplified), no RAM
//   ecs_early_term   x2: CRC check on the u side (L_1, R_1) and on the x side
//                    (L_{n+1}, R_{n+1}); either one ends the frame
//   ecs_control      load / run / stop at pass or after MAX_CYCLES
// The frozen-bit source of the graph's left end is constant and lives inside
// ecs_msg_update and ecs_early_term (from FROZEN).
//
// Interface: drive y (N signed LLR_W-bit values, 4y quantised, |value| 64 = certain)
// and pulse `start` while `busy` is low. `done` pulses when the frame ends; `u_hat`
// (all N u bits, frozen ones 0), `success` (a CRC passed), `sel_r` (the x side passed
// first) and `cycles` (clocks the frame ran) then stay valid until the next start.
// The block structure and all numeric defaults are the paper's; the frame handshake,
// the pipelining and the CRC details are this design's choices.
module ecs_pd
  import ecs_pkg::*;
#(
  parameter int unsigned      N          = 256,
  parameter logic [N-1:0]     FROZEN     = 256'h0115111701171757011717571517177f011715571517177f1517177f1777777f,
  parameter int unsigned      CRC_W      = 16,
  parameter logic [CRC_W-1:0] CRC_POLY   = 16'h1021,
  parameter logic [CRC_W-1:0] CRC_INIT   = 16'hFFFF,
  parameter int unsigned      MAX_CYCLES = 800,
  parameter int unsigned      LLR_W      = 7,
  parameter int unsigned      R_W        = 6,
  parameter int unsigned      PT_W       = 6,
  parameter int unsigned      ALPHA_M    = 2,
  parameter int unsigned      CNT_W      = $clog2(MAX_CYCLES + 2)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [LLR_W-1:0] y [N],
  output logic                    busy,
  output logic                    done,
  output logic                    success,
  output logic                    sel_r,
  output logic [CNT_W-1:0]        cycles,
  output logic [N-1:0]            u_hat
);
  localparam int unsigned K = N - $countones(FROZEN);

  logic           load;
  logic [R_W-1:0] r;
  sbit_t          l_ch  [N];
  sbit_t          l_u   [N];
  sbit_t          r_x   [N];
  sbit_t          r_u   [N];
  logic [N-1:0]   u_l, u_r;
  logic           pass_l, pass_r;

  // R_1 as seen by the u-side check: +1 for frozen positions, 0 otherwise (eq. (12)).
  for (genvar k = 0; k < N; k++) begin : g_r1
    assign r_u[k] = FROZEN[k] ? SBIT_FROZEN : SBIT_ZERO;
  end

  ecs_sobol_gen #(.W(R_W)) u_sobol (.clk, .rst_n, .load, .r);

  ecs_bsg #(.N(N), .LLR_W(LLR_W), .R_W(R_W)) u_bsg (
    .clk, .rst_n, .load, .y, .r, .l_out(l_ch)
  );

  ecs_msg_update #(.N(N), .FROZEN(FROZEN), .PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_graph (
    .clk, .rst_n, .clr(load), .r, .l_in(l_ch), .l_out(l_u), .r_out(r_x)
  );

  ecs_early_term #(.N(N), .FROZEN(FROZEN), .FROM_X(1'b0), .CRC_W(CRC_W), .CRC_POLY(CRC_POLY),
                   .CRC_INIT(CRC_INIT), .PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_et_left (
    .clk, .rst_n, .clr(load), .r, .a(l_u), .b(r_u), .u_hat(u_l), .pass(pass_l)
  );

  ecs_early_term #(.N(N), .FROZEN(FROZEN), .FROM_X(1'b1), .CRC_W(CRC_W), .CRC_POLY(CRC_POLY),
                   .CRC_INIT(CRC_INIT), .PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_et_right (
    .clk, .rst_n, .clr(load), .r, .a(l_ch), .b(r_x), .u_hat(u_r), .pass(pass_r)
  );

  ecs_control #(.MAX_CYCLES(MAX_CYCLES), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n, .start, .pass_l, .pass_r, .load, .busy, .done, .sel_r, .success, .cycles
  );

  // The result follows the checks while the frame runs and freezes when it ends.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    u_hat <= '0;
    else if (busy) u_hat <= (pass_r && !pass_l) ? u_r : u_l;
  end

  initial assert (K > CRC_W) else $error("ecs_pd: K = %0d leaves no data bits for CRC_W = %0d", K, CRC_W);
endmodule
