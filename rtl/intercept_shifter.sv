// intercept_shifter: run-time rescaling of a stored intercept by the input
// scale S.
//
// With a power-of-two input scale S = 2^-s, pwl(S*q) = S*(k*q + b/S), and
// b/S = b * 2^s. The table keeps the original intercept b; this block forms
// b~ = b << s so that the multiply-add can work on the raw integer q. The
// output is widened by 2^SHIFT_W - 1 bits so the shift never loses bits.
// Combinational. The published method writes the shift as b >> round(log2
// alpha); every evaluated scale is <= 1, so it is a left shift by
// s = -round(log2 alpha), which is what is built here. Scales above 1 are not
// supported (this design's choice), nor is the 3-bit shift amount published.
module intercept_shifter #(
  parameter int unsigned W       = 8,
  parameter int unsigned SHIFT_W = 3,
  localparam int unsigned BW = W + (1 << SHIFT_W) - 1
) (
  input  logic signed [W-1:0]  b,
  input  logic [SHIFT_W-1:0]   shamt,
  output logic signed [BW-1:0] b_scaled
);

  logic signed [BW-1:0] b_ext;

  assign b_ext    = BW'(b);           // sign extension
  assign b_scaled = b_ext <<< shamt;

endmodule
