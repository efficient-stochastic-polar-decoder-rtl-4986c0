// ecs_pt: probability tracker (PT) of the G module.
//
// Tracks the running mean of x~ in {-2,-1,0,+1,+2} with the relaxation update
//   P(t) = P(t-1) - alpha * (P(t-1) - x~),   alpha = 2^-ALPHA_M.
// P is a PT_W-bit two's-complement number with bit n = PT_W-1 as its sign and bit
// n-1 worth 1, so P covers [-2, 2) with LSB 2^-(n-1).
//
// Datapath, in the order the paper draws it: a combinational block forms P - x~ for
// every possible x~ without an adder (only bits n+1, n, n-1 change; the paper's
// eq. (9) gives them), each candidate is shifted right by ALPHA_M (arithmetic), a MUX
// picks the candidate for this cycle's x~, and a subtractor forms P - alpha*(P - x~)
// into the register. The x~ = 0 candidate is P itself. Two details are this design's
// own: the shift floors (arithmetic shift), and the subtractor saturates to the
// PT_W-bit range, because P = 2 - LSB with x~ = +2 would otherwise wrap to -2.
//
// Timing: one update per clock. `clr` (synchronous, new frame) sets P to 0; reset is
// asynchronous, active low.
module ecs_pt #(
  parameter int unsigned PT_W    = 6,
  parameter int unsigned ALPHA_M = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic signed [2:0]      xt,
  output logic signed [PT_W-1:0] p
);
  localparam int unsigned NB = PT_W - 1;  // index n of the paper's equations

  localparam logic signed [PT_W:0] P_MAX = (PT_W+1)'((1 << NB) - 1);
  localparam logic signed [PT_W:0] P_MIN = -(PT_W+1)'(1 << NB);

  // Candidates Q = P - x~ (PT_W+1 bits), index 0..4 for x~ = -2..+2.
  logic        [PT_W:0] q [5];
  logic signed [PT_W:0] qs [5];
  logic signed [PT_W:0] sel;
  logic signed [PT_W:0] diff;

  always_comb begin
    for (int k = 0; k < 5; k++) q[k] = {p[NB], p};      // Q_{n-2}..Q_0 = P_{n-2}..P_0
    // x~ = -2
    q[0][NB+1] = 1'b0;
    q[0][NB]   = ~p[NB];
    q[0][NB-1] = p[NB-1];
    // x~ = -1
    q[1][NB+1] = p[NB] & ~p[NB-1];
    q[1][NB]   = p[NB] ^ p[NB-1];
    q[1][NB-1] = ~p[NB-1];
    // x~ = 0 : Q = P, already set
    // x~ = +1
    q[3][NB+1] = p[NB] | ~p[NB-1];
    q[3][NB]   = ~(p[NB] ^ p[NB-1]);
    q[3][NB-1] = ~p[NB-1];
    // x~ = +2
    q[4][NB+1] = 1'b1;
    q[4][NB]   = ~p[NB];
    q[4][NB-1] = p[NB-1];

    for (int k = 0; k < 5; k++) qs[k] = $signed(q[k]) >>> ALPHA_M;

    unique case (xt)
      -3'sd2:  sel = qs[0];
      -3'sd1:  sel = qs[1];
       3'sd1:  sel = qs[3];
       3'sd2:  sel = qs[4];
      default: sel = qs[2];
    endcase

    diff = {p[NB], p} - sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            p <= '0;
    else if (clr)          p <= '0;
    else if (diff > P_MAX) p <= P_MAX[PT_W-1:0];
    else if (diff < P_MIN) p <= P_MIN[PT_W-1:0];
    else                   p <= diff[PT_W-1:0];
  end

  // x~ is the sum of two stream bits, so it never leaves [-2, 2].
  a_xt_range: assert property (@(posedge clk) disable iff (!rst_n) (xt >= -3'sd2) && (xt <= 3'sd2));
endmodule
