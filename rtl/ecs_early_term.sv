// ecs_early_term: CRC-aided early-termination check for one end of the factor graph.
//
// The decoder has two of these. For each of the N positions a G module forms
// g(a, b) from the two message streams that meet at that end of the graph (a = L,
// b = R) and its tracker sign is the hard decision (1 = negative = bit 1):
//   FROM_X = 0 (left end):  a = L_1, b = R_1; decisions are u directly, frozen
//                           positions are 0 and need no G module.
//   FROM_X = 1 (right end): a = L_{n+1}, b = R_{n+1}; decisions are the code bits x,
//                           turned back into u by the (self-inverse) polar transform of
//                           the same factor graph, and the frozen u must come out 0.
// The information positions, in ascending order, hold K - CRC_W data bits followed by
// CRC_W check bits (first check bit = CRC MSB). `pass` is set when the CRC computed
// over the data bits (shifted in MSB-first, polynomial CRC_POLY, start value CRC_INIT)
// equals the check bits. Deciding through g(), using a CRC-16 and checking at both ends
// follow the paper; the polynomial, start value, bit order and the right end's
// transform-and-check are this design's choices.
//
// Timing: decisions follow the trackers (one clock behind the input streams);
// `u_hat` and `pass` are registered, one more clock. `clr` clears trackers and `pass`.
// Only the sign of each G module output is used; its magnitude bit is left unread.
module ecs_early_term
  import ecs_pkg::*;
#(
  parameter int unsigned  N        = 256,
  parameter logic [N-1:0] FROZEN   = 256'h0115111701171757011717571517177f011715571517177f1517177f1777777f,
  parameter bit           FROM_X   = 1'b0,
  parameter int unsigned  CRC_W    = 16,
  parameter logic [CRC_W-1:0] CRC_POLY = 16'h1021,
  parameter logic [CRC_W-1:0] CRC_INIT = 16'hFFFF,
  parameter int unsigned  PT_W     = 6,
  parameter int unsigned  ALPHA_M  = 2,
  parameter int unsigned  R_W      = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic [R_W-1:0] r,
  input  sbit_t          a     [N],
  input  sbit_t          b     [N],
  output logic [N-1:0]   u_hat,
  output logic           pass
);
  localparam int unsigned NS = $clog2(N);
  localparam int unsigned H  = N / 2;
  localparam int unsigned K  = N - $countones(FROZEN);
  localparam int unsigned KD = K - CRC_W;

  logic [N-1:0] dec;
  logic [N-1:0] u_now;
  logic         ok_now;

  for (genvar k = 0; k < N; k++) begin : g_dec
    if (!FROM_X && FROZEN[k]) begin : g_frz
      assign dec[k] = 1'b0;
    end else begin : g_gm
      sbit_t z;
      ecs_gm #(.PT_W(PT_W), .ALPHA_M(ALPHA_M), .R_W(R_W)) u_gm (
        .clk, .rst_n, .clr, .x(a[k]), .y(b[k]), .r, .z
      );
      assign dec[k] = z.sgn;
    end
  end

  // Polar transform on the graph: v[s][j] = v[s+1][2j] ^ v[s+1][2j+1],
  // v[s][j+N/2] = v[s+1][2j+1]; it maps x to u (and u to x).
  function automatic logic [N-1:0] to_u(logic [N-1:0] x);
    logic [N-1:0] v, w;
    v = x;
    for (int s = 0; s < NS; s++) begin
      for (int j = 0; j < H; j++) begin
        w[j]   = v[2*j] ^ v[2*j+1];
        w[j+H] = v[2*j+1];
      end
      v = w;
    end
    return v;
  endfunction

  always_comb begin
    logic [K-1:0]     info;
    logic [CRC_W-1:0] crc, rx;
    logic             fb, frozen_ok;
    int               c;
    u_now = FROM_X ? to_u(dec) : dec;
    info  = '0;
    c     = 0;
    for (int k = 0; k < N; k++)
      if (!FROZEN[k]) begin
        info[c] = u_now[k];
        c++;
      end
    crc = CRC_INIT;
    for (int i = 0; i < KD; i++) begin
      fb  = crc[CRC_W-1] ^ info[i];
      crc = {crc[CRC_W-2:0], 1'b0} ^ (fb ? CRC_POLY : '0);
    end
    for (int i = 0; i < CRC_W; i++) rx[CRC_W-1-i] = info[KD+i];
    frozen_ok = ((u_now & FROZEN) == '0);
    ok_now    = (crc == rx) && frozen_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_hat <= '0;
      pass  <= 1'b0;
    end else if (clr) begin
      u_hat <= '0;
      pass  <= 1'b0;
    end else begin
      u_hat <= u_now;
      pass  <= ok_now;
    end
  end
endmodule
