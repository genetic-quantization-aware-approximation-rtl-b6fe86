// pwl_mac: multiply-add of the piece-wise linear unit, y = k*q + b~.
//
// k is the slope of the selected segment (W-bit signed fixed point), q the
// integer input and b~ the intercept already rescaled to q's grid. The
// product and the sum are kept at full precision, 2W+1 bits, so y carries the
// same LAMBDA fraction bits as k and b. Combinational.
// The multiply-then-add order is the published segment equation; the
// full-precision output (no rounding) is this design's choice.
module pwl_mac #(
  parameter int unsigned W  = 8,
  parameter int unsigned BW = 15,
  localparam int unsigned YW = 2 * W + 1
) (
  input  logic signed [W-1:0]  q,
  input  logic signed [W-1:0]  k,
  input  logic signed [BW-1:0] b_scaled,
  output logic signed [YW-1:0] y
);

  logic signed [2*W-1:0] prod;

  assign prod = k * q;
  assign y    = YW'(prod) + YW'(b_scaled);

  initial assert (BW <= YW - 1)
    else $error("pwl_mac: intercept width BW=%0d does not fit the output", BW);

endmodule
