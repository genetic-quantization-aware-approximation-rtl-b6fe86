// mris_prescale: multi-range input scaling for the wide-range operators.
//
// DIV (reciprocal) and RSQRT (reciprocal square root) take intermediate
// fixed-point values whose range is far wider than the breakpoint interval IR
// the table was fitted on (0.5..4 for DIV, 0.25..4 for RSQRT). The range
// outside IR is cut into three sub-ranges SR0..SR2, each with a power-of-two
// scale S'_i that maps it back towards IR:
//     DIV   : [4,32) x 2^-3,  [32,256) x 2^-6,   [256,inf) x 2^-6
//     RSQRT : [4,64) x 2^-4,  [64,1024) x 2^-8,  [1024,inf) x 2^-12
// The block finds the sub-range with three comparisons, shifts the input right
// by -log2(S'_i), rounds to nearest and clips to the W-bit signed input of the
// pwl core (the scaled value keeps LAMBDA fraction bits, i.e. it is the
// integer q' = x' * 2^LAMBDA). It also returns the shift that undoes the
// scaling at the output: -log2(S'_i) for DIV (1/x = S'/x') and half of it for
// RSQRT (1/sqrt(x) = sqrt(S')/sqrt(x')). In QUANT mode q_in passes through.
// The sub-ranges and scales are the published ones. The input format
// (unsigned, XW bits with LAMBDA fraction bits), round-half-up and the
// treatment of values below IR (no scaling) are this design's choices.
// Combinational.
module mris_prescale
  import gqa_pkg::*;
#(
  parameter int unsigned W      = 8,
  parameter int unsigned XW     = 24,
  parameter int unsigned LAMBDA = LAMBDA_DEF
) (
  input  op_mode_e            mode,
  input  logic signed [W-1:0] q_in,
  input  logic [XW-1:0]       x_wide,
  output logic signed [W-1:0] q_out,
  output logic [2:0]          post_shift,
  output sub_range_e          sub_range
);

  localparam logic [XW-1:0] QMAX = XW'((1 << (W - 1)) - 1);

  logic [XW-1:0] lim0, lim1, lim2;
  logic [3:0]    sh;
  logic [XW:0]   rounded;  // one extra bit for the rounding carry

  always_comb begin
    if (mode == MODE_RSQRT) begin
      lim0 = XW'(RSQRT_LIM0) << LAMBDA;
      lim1 = XW'(RSQRT_LIM1) << LAMBDA;
      lim2 = XW'(RSQRT_LIM2) << LAMBDA;
    end else begin
      lim0 = XW'(DIV_LIM0) << LAMBDA;
      lim1 = XW'(DIV_LIM1) << LAMBDA;
      lim2 = XW'(DIV_LIM2) << LAMBDA;
    end

    if (x_wide >= lim2)      sub_range = RANGE_SR2;
    else if (x_wide >= lim1) sub_range = RANGE_SR1;
    else if (x_wide >= lim0) sub_range = RANGE_SR0;
    else                     sub_range = RANGE_IR;

    unique case (sub_range)
      RANGE_SR0: sh = (mode == MODE_RSQRT) ? 4'(RSQRT_SH0) : 4'(DIV_SH0);
      RANGE_SR1: sh = (mode == MODE_RSQRT) ? 4'(RSQRT_SH1) : 4'(DIV_SH1);
      RANGE_SR2: sh = (mode == MODE_RSQRT) ? 4'(RSQRT_SH2) : 4'(DIV_SH2);
      default:   sh = 4'd0;
    endcase

    // round half up: add half an LSB of the shifted value, then shift
    if (sh == 4'd0) rounded = {1'b0, x_wide};
    else            rounded = ({1'b0, x_wide} + ((XW + 1)'(1) << (sh - 4'd1))) >> sh;

    if (mode == MODE_QUANT) begin
      q_out      = q_in;
      post_shift = 3'd0;
      sub_range  = RANGE_IR;
    end else begin
      q_out      = (rounded > {1'b0, QMAX}) ? W'(QMAX) : W'(rounded);
      post_shift = (mode == MODE_RSQRT) ? 3'(sh >> 1) : 3'(sh);
    end
  end

endmodule
