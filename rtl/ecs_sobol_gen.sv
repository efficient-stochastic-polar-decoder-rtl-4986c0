// ecs_sobol_gen: the single random-number source R(t) of the decoder.
//
// Every stream comparator in the decoder uses the same R(t), which is what makes all
// streams positively correlated. The paper asks for a Sobol sequence built from only
// log2(l) registers (l = stream period). This block keeps one W-bit counter t and
// outputs the first Sobol dimension in Gray-code order, R(t) = bitreverse(t ^ (t>>1)):
// each step flips the one direction number 2^-(c+1), c = index of the lowest zero of t,
// so every aligned window of 2^k outputs hits each 2^-k interval exactly once.
//
// Timing: R(t) is a function of the counter register only (no combinational input
// path). `load` (one cycle, from the control block) restarts the sequence at R = 0 on
// the next cycle. Reset is asynchronous, active low (this design's choice).
module ecs_sobol_gen #(
  parameter int unsigned W = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  output logic [W-1:0] r
);
  logic [W-1:0] cnt;
  logic [W-1:0] gray;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cnt <= '0;
    else if (load) cnt <= '0;
    else           cnt <= cnt + 1'b1;
  end

  always_comb begin
    gray = cnt ^ (cnt >> 1);
    for (int k = 0; k < W; k++) r[k] = gray[W-1-k];
  end
endmodule
