// ecs_msg_update: message update iteration module (the factor graph in hardware).
//
// The polar factor graph has n = log2(N) stages; column c (0..n) holds N nodes, column
// 0 on the u side and column n on the channel side. Stage s (0..n-1) is N/2 LCUs and
// N/2 RCUs between column s and column s+1. Unit j of stage s reads
//   R[s][j], R[s][j+N/2]  (left column)  and  L[s+1][2j], L[s+1][2j+1]  (right column)
// and writes L[s][j], L[s][j+N/2] (LCU) and R[s+1][2j], R[s+1][2j+1] (RCU); indices are
// 0-based versions of the paper's (i,j) -> (i+1,2j-1),(i+1,2j). This index shuffle is
// the "message interconnection" between the two arrays. Every stage is identical, so
// the same wiring is used n times.
//
// L[n] is the channel stream from the bit stream generator (l_in); R[0] is the frozen
// pattern (+1 stream for a frozen u, 0 for an information bit). The module exports
// L[0] (to the left early-termination block) and R[n] (to the right one).
//
// Frozen-ness propagates rightwards: R[s+1][2j+1] is frozen iff R[s][j+N/2] is, and
// R[s+1][2j] iff both R[s][j] and R[s][j+N/2] are. From these flags every unit gets its
// simplified type at elaboration (ecs_pkg::cu_type). All units update every clock; each
// unit output is one register, so a message moves one stage per clock and there is no
// RAM. FROZEN bit k = 1 marks u_{k+1} as frozen; its default is the (256,128) set of a
// Bhattacharyya-bound construction at Eb/N0 = 3 dB for this graph's index order (the
// paper builds its set with the Tal-Vardy method, which this default does not repeat).
module ecs_msg_update
  import ecs_pkg::*;
#(
  parameter int unsigned N       = 256,
  parameter logic [N-1:0] FROZEN = 256'h0115111701171757011717571517177f011715571517177f1517177f1777777f,
  parameter int unsigned PT_W    = 6,
  parameter int unsigned ALPHA_M = 2,
  parameter int unsigned R_W     = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic [R_W-1:0] r,
  input  sbit_t          l_in  [N],
  output sbit_t          l_out [N],
  output sbit_t          r_out [N]
);
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned H  = N / 2;

  typedef logic [NS:0][N-1:0] fmap_t;

  function automatic fmap_t frozen_map(logic [N-1:0] f0);
    fmap_t m;
    m[0] = f0;
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < H; j++) begin
        m[s+1][2*j]   = m[s][j] & m[s][j+H];
        m[s+1][2*j+1] = m[s][j+H];
      end
    return m;
  endfunction

  localparam fmap_t FMAP = frozen_map(FROZEN);

  sbit_t L [NS+1][N];
  sbit_t R [NS+1][N];

  for (genvar k = 0; k < N; k++) begin : g_ends
    assign L[NS][k] = l_in[k];
    assign R[0][k]  = FROZEN[k] ? SBIT_FROZEN : SBIT_ZERO;
    assign l_out[k] = L[0][k];
    assign r_out[k] = R[NS][k];
  end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    for (genvar j = 0; j < H; j++) begin : g_cu
      localparam cu_type_e T = cu_type(FMAP[s][j], FMAP[s][j+H]);
      ecs_lcu #(.TYPE(T), .PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_lcu (
        .clk, .rst_n, .clr, .r,
        .r_j(R[s][j]), .r_jn(R[s][j+H]), .l_a(L[s+1][2*j]), .l_b(L[s+1][2*j+1]),
        .l_j(L[s][j]), .l_jn(L[s][j+H])
      );
      ecs_rcu #(.TYPE(T), .PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_rcu (
        .clk, .rst_n, .clr, .r,
        .r_j(R[s][j]), .r_jn(R[s][j+H]), .l_a(L[s+1][2*j]), .l_b(L[s+1][2*j+1]),
        .r_a(R[s+1][2*j]), .r_b(R[s+1][2*j+1])
      );
    end
  end
endmodule
