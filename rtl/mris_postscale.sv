// mris_postscale: output rescaling of the multi-range input scaling.
//
// After the pwl core has evaluated DIV or RSQRT on the scaled input x' = x*S',
// the result must be multiplied by S' (DIV) or sqrt(S') (RSQRT). Both are
// powers of two, 2^-post_shift, so the multiplication is a shift. To lose no
// bits, the output is widened by POST_MAX and the core result is shifted left
// by POST_MAX - post_shift: in the wide modes y_out then has a fixed format
// with 2*LAMBDA + POST_MAX fraction bits (16 for the defaults), whatever the
// sub-range. In QUANT mode (wide = 0) y_in is only sign-extended.
// Multiplying by S'/sqrt(S') is the published step; the widened fixed-format
// output is this design's choice. Combinational.
module mris_postscale #(
  parameter int unsigned YW       = 17,
  parameter int unsigned POST_MAX = gqa_pkg::POST_MAX,
  localparam int unsigned OW = YW + POST_MAX
) (
  input  logic signed [YW-1:0] y_in,
  input  logic                 wide,
  input  logic [2:0]           post_shift,
  output logic signed [OW-1:0] y_out
);

  logic signed [OW-1:0] y_ext;
  logic [2:0]           lsh;

  assign y_ext = OW'(y_in);
  assign lsh   = 3'(POST_MAX) - post_shift;
  assign y_out = wide ? (y_ext <<< lsh) : y_ext;

endmodule
