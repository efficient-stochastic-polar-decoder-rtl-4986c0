// ecs_pkg: types and constants shared by the correlated stochastic polar decoder.
//
// Every message in the decoder is a signed stochastic bit stream. One stream bit is
// two wires: `sn` (the magnitude bit, 1 = the value is non-zero in this cycle) and
// `sgn` (1 = negative). A bit therefore carries -1, 0 or +1, and the average over time
// is the message value in [-1, +1]. All streams are made by comparing against the
// same random number R(t), so they are positively correlated: an AND of two magnitude
// bits gives the minimum of the two magnitudes, which is what the min-sum f() needs.
//
// The 2-bit (sign, magnitude) format follows the paper's F and G module drawings;
// the field order inside the struct is this design's choice.
package ecs_pkg;

  // One stochastic message bit.
  typedef struct packed {
    logic sgn;  // 1 = negative
    logic sn;   // 1 = magnitude one in this cycle
  } sbit_t;

  // Constant stream of a frozen R message: +1 every cycle (the "certain" value).
  localparam sbit_t SBIT_FROZEN = '{sgn: 1'b0, sn: 1'b1};
  localparam sbit_t SBIT_ZERO   = '{sgn: 1'b0, sn: 1'b0};

  // Simplified computing-unit types, chosen per position from the frozen set.
  typedef enum logic [1:0] {
    CU_ORIG = 2'd0,  // no frozen input
    CU_T1   = 2'd1,  // both R_{i,j} and R_{i,j+N/2} frozen
    CU_T2   = 2'd2,  // R_{i,j} frozen
    CU_T3   = 2'd3   // R_{i,j+N/2} frozen
  } cu_type_e;

  // Signed value of one stream bit: -1, 0 or +1.
  function automatic logic signed [1:0] sval(sbit_t b);
    return b.sn ? (b.sgn ? -2'sd1 : 2'sd1) : 2'sd0;
  endfunction

  // CU type from the frozen flags of R_{i,j} (fj) and R_{i,j+N/2} (fjn).
  function automatic cu_type_e cu_type(logic fj, logic fjn);
    unique case ({fj, fjn})
      2'b11:   return CU_T1;
      2'b10:   return CU_T2;
      2'b01:   return CU_T3;
      default: return CU_ORIG;
    endcase
  endfunction

endpackage
