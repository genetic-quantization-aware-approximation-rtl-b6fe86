// gqa_pkg: types and constants shared by the quantization-aware piece-wise
// linear (pwl) non-linear unit.
//
// The unit evaluates y = k_i*q + b_i/S on an integer input q, with a table of
// N slopes k_i, N intercepts b_i (W-bit fixed point, LAMBDA fraction bits) and
// N-1 breakpoints already quantized to q's grid. Two operating modes exist:
//  - QUANT : q is an INT8 activation with a power-of-two scale S = 2^-s
//            (GELU, HSWISH, EXP in the evaluated models);
//  - DIV / RSQRT : a wide fixed-point input is first brought into the table's
//            interval by a power-of-two scale S' chosen per sub-range, and the
//            result is multiplied back by S' (DIV) or sqrt(S') (RSQRT).
// The sub-range limits and scales below are the published ones for the
// 8-bit configuration; LAMBDA = 5 is the published fraction width. The 24-bit
// wide-input format is this design's own choice.
package gqa_pkg;

  // Operating mode of the unit.
  typedef enum logic [1:0] {
    MODE_QUANT = 2'd0,
    MODE_DIV   = 2'd1,
    MODE_RSQRT = 2'd2
  } op_mode_e;

  // Sub-range selected by the multi-range input scaling.
  typedef enum logic [1:0] {
    RANGE_IR  = 2'd0,  // inside the breakpoint interval, no scaling
    RANGE_SR0 = 2'd1,
    RANGE_SR1 = 2'd2,
    RANGE_SR2 = 2'd3
  } sub_range_e;

  // Fraction bits of slopes, intercepts and fixed-point inputs.
  localparam int unsigned LAMBDA_DEF = 5;

  // Lower limits (integer part) of SR0, SR1, SR2.
  localparam int unsigned DIV_LIM0   = 4;
  localparam int unsigned DIV_LIM1   = 32;
  localparam int unsigned DIV_LIM2   = 256;
  localparam int unsigned RSQRT_LIM0 = 4;
  localparam int unsigned RSQRT_LIM1 = 64;
  localparam int unsigned RSQRT_LIM2 = 1024;

  // -log2(S'_i) for SR0, SR1, SR2: the input right shift.
  localparam int unsigned DIV_SH0   = 3;
  localparam int unsigned DIV_SH1   = 6;
  localparam int unsigned DIV_SH2   = 6;
  localparam int unsigned RSQRT_SH0 = 4;
  localparam int unsigned RSQRT_SH1 = 8;
  localparam int unsigned RSQRT_SH2 = 12;

  // Largest output rescale shift: max(-log2 S'_i) for DIV = 6,
  // max(-log2 sqrt(S'_i)) for RSQRT = 12/2 = 6.
  localparam int unsigned POST_MAX = 6;

endpackage
