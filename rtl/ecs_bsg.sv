// ecs_bsg: bit stream generator for the channel side of the graph.
//
// On `load` it stores the N channel values of a frame. Each value is LLR' = N0*LLR =
// 4y (the paper's scaling, which removes the noise power from the LLR), quantised by
// the user to a signed LLR_W-bit number whose magnitude 2^(LLR_W-1) means probability
// one. Every clock each stored value becomes one stream bit L_{n+1,j} per eq. (11):
//   +1 when LLR' > 0 and R(t) <= |LLR'|,  -1 when LLR' < 0 and R(t) < |LLR'|,  else 0.
// The comparison rule (including its asymmetry) is the paper's; the storage register
// and the quantisation scale are this design's choices.
//
// Timing: the streams are combinational from the stored values and R(t); new values
// are used from the cycle after `load`.
module ecs_bsg
  import ecs_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned LLR_W = 7,
  parameter int unsigned R_W   = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic signed [LLR_W-1:0] y     [N],
  input  logic        [R_W-1:0]   r,
  output sbit_t                   l_out [N]
);
  logic signed [LLR_W-1:0] llr [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) llr[k] <= '0;
    end else if (load) begin
      for (int k = 0; k < N; k++) llr[k] <= y[k];
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic signed [LLR_W:0] ext;
      logic        [LLR_W:0] mag;
      ext = {llr[k][LLR_W-1], llr[k]};
      mag = llr[k][LLR_W-1] ? -ext : ext;
      l_out[k].sgn = llr[k][LLR_W-1];
      if (llr[k] == '0)           l_out[k].sn = 1'b0;
      else if (llr[k][LLR_W-1])   l_out[k].sn = ((LLR_W+1)'(r) <  mag);
      else                        l_out[k].sn = ((LLR_W+1)'(r) <= mag);
    end
  end
endmodule
