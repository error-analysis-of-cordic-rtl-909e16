// cordic_pkg -- number formats and shared types of the pipelined CORDIC.
//
// All angles and the stored constants use the Q1.15 format: 16-bit two's
// complement with 15 fractional bits, so one LSB is 2^-15 rad.  The x/y
// datapath keeps the same 15 fractional bits but carries one more integer
// bit (17 bits, Q2.15): the vector starts at length 1.0, which Q1.15 cannot
// hold, and grows by the CORDIC gain K = 1.6468 before the final scaling.
// That guard bit is this design's choice; the fraction width (b = 15), the
// 16-bit word and the 16 iterations follow the published design.
// The cos/sin outputs are 22 bits with 20 fractional bits (Q2.20); the
// 22-bit width is the one shown for the outputs of the published design.
package cordic_pkg;

  localparam int unsigned FRAC_W   = 15;          // b, fractional bits
  localparam int unsigned ANGLE_W  = 16;          // Q1.15 angle word
  localparam int unsigned XY_W     = FRAC_W + 2;  // Q2.15 datapath word
  localparam int unsigned N_ITER   = 16;          // iterations = stages
  localparam int unsigned OUT_W    = 22;          // cos/sin word
  localparam int unsigned OUT_FRAC = 20;          // cos/sin fraction bits
  localparam int unsigned CONST_W  = 16;          // stored constants, Q1.15
  localparam int unsigned ROM_AW   = 5;           // 16 angles + K^-1
  localparam int unsigned ROM_KINV_ADDR = N_ITER; // address of K^-1

  // Largest accepted angle magnitude, 0.9579 rad in Q1.15 (31388 LSB).
  localparam logic signed [ANGLE_W-1:0] THETA_MAX = 16'sd31388;

  typedef logic signed [XY_W-1:0]    xy_t;
  typedef logic signed [ANGLE_W-1:0] angle_t;
  typedef logic signed [OUT_W-1:0]   out_t;

  // State carried from one micro-rotation to the next.
  typedef struct packed {
    logic   valid;
    xy_t    x;
    xy_t    y;
    angle_t z;   // residual angle still to be rotated
  } cordic_vec_t;

endpackage
