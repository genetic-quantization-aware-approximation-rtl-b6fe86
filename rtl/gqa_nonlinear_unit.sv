// gqa_nonlinear_unit: unified INT8 non-linear engine built around one
// quantization-aware piece-wise linear (pwl) core.
//
// One table-driven core serves every non-linear operator of the target
// Transformers; the table is reloaded with the parameters of the operator in
// use. Two kinds of operand exist:
//  - mode QUANT (GELU, HSWISH, EXP): q is an INT8 activation whose scale is a
//    power of two, S = 2^-scale_exp. The core works on q directly and shifts
//    only the intercept by scale_exp. y = k_i*q + b_i*2^scale_exp, and the
//    real result is y * S * 2^-LAMBDA.
//  - mode DIV / RSQRT: x_wide is an unsigned fixed-point value (XW bits,
//    LAMBDA fraction bits) that may lie far outside the table's interval.
//    Multi-range input scaling picks a sub-range, scales x by S' into the
//    table's interval, the core evaluates it with an intercept shift of LAMBDA
//    (the scaled input has LAMBDA fraction bits), and the result is scaled by
//    S' or sqrt(S'). The real result is y * 2^-(2*LAMBDA + POST_MAX).
//
// Pipeline: stage 1 registers the (pre-scaled) core operand, its mode and the
// output shift; stage 2 is the core's registered multiply-add. out_valid
// follows in_valid two cycles later, one result per cycle. The table write
// port (lut_*) may be used between operations; the host writes the N entries
// of the operator before streaming its inputs.
// What follows the published design: the INT8 8-entry table of slopes,
// intercepts and quantized breakpoints, the run-time intercept shifter, the
// sub-range limits and scales of the wide-range operators. This design's
// choices: the two-stage pipeline, the table write port, the mode encoding and
// the output formats.
module gqa_nonlinear_unit
  import gqa_pkg::*;
#(
  parameter int unsigned N      = 8,
  parameter int unsigned W      = 8,
  parameter int unsigned LAMBDA = LAMBDA_DEF,
  parameter int unsigned XW     = 24,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned YW = 2 * W + 1,
  localparam int unsigned OW = YW + POST_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // table load
  input  logic                 lut_wr_en,
  input  logic [IW-1:0]        lut_wr_addr,
  input  logic signed [W-1:0]  lut_wr_k,
  input  logic signed [W-1:0]  lut_wr_b,
  input  logic signed [W-1:0]  lut_wr_p,
  // operand
  input  logic                 in_valid,
  input  op_mode_e             mode,
  input  logic [2:0]           scale_exp,
  input  logic signed [W-1:0]  q,
  input  logic [XW-1:0]        x_wide,
  // result
  output logic                 out_valid,
  output logic signed [OW-1:0] y,
  output logic [IW-1:0]        out_seg,
  output sub_range_e           out_sub_range
);

  // ---- stage 0: multi-range input scaling (combinational) ----
  logic signed [W-1:0] q_pre;
  logic [2:0]          post_shift_pre;
  sub_range_e          sub_range_pre;

  mris_prescale #(.W(W), .XW(XW), .LAMBDA(LAMBDA)) u_pre (
    .mode       (mode),
    .q_in       (q),
    .x_wide     (x_wide),
    .q_out      (q_pre),
    .post_shift (post_shift_pre),
    .sub_range  (sub_range_pre)
  );

  // ---- stage 1 register ----
  logic                s1_valid;
  logic signed [W-1:0] s1_q;
  logic [2:0]          s1_shamt;
  logic                s1_wide;
  logic [2:0]          s1_post;
  sub_range_e          s1_range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_q     <= '0;
      s1_shamt <= '0;
      s1_wide  <= 1'b0;
      s1_post  <= '0;
      s1_range <= RANGE_IR;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_q     <= q_pre;
        s1_shamt <= (mode == MODE_QUANT) ? scale_exp : 3'(LAMBDA);
        s1_wide  <= (mode != MODE_QUANT);
        s1_post  <= post_shift_pre;
        s1_range <= sub_range_pre;
      end
    end
  end

  // ---- stage 2: pwl core (registered output) ----
  logic                 core_valid;
  logic signed [YW-1:0] core_y;
  logic [IW-1:0]        core_seg;
  logic                 s2_wide;
  logic [2:0]           s2_post;

  gqa_pwl_core #(.N(N), .W(W), .LAMBDA(LAMBDA), .SHIFT_W(3)) u_core (
    .clk         (clk),
    .rst_n       (rst_n),
    .lut_wr_en   (lut_wr_en),
    .lut_wr_addr (lut_wr_addr),
    .lut_wr_k    (lut_wr_k),
    .lut_wr_b    (lut_wr_b),
    .lut_wr_p    (lut_wr_p),
    .in_valid    (s1_valid),
    .q           (s1_q),
    .shamt       (s1_shamt),
    .out_valid   (core_valid),
    .y           (core_y),
    .seg         (core_seg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_wide       <= 1'b0;
      s2_post       <= '0;
      out_sub_range <= RANGE_IR;
    end else if (s1_valid) begin
      s2_wide       <= s1_wide;
      s2_post       <= s1_post;
      out_sub_range <= s1_range;
    end
  end

  // ---- output rescaling (combinational on the core register) ----
  mris_postscale #(.YW(YW), .POST_MAX(POST_MAX)) u_post (
    .y_in       (core_y),
    .wide       (s2_wide),
    .post_shift (s2_post),
    .y_out      (y)
  );

  assign out_valid = core_valid;
  assign out_seg   = core_seg;

  // The table must not change while an operand is in flight.
  a_no_write_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
                                         lut_wr_en |-> !s1_valid)
    else $error("gqa_nonlinear_unit: table written while an operand is in flight");

endmodule
