// pwl_comparer: segment selection of the piece-wise linear unit.
//
// Returns the index i of the linear piece that covers the input q:
//   i = 0 if q < p0;  i if p(i-1) <= q < p(i);  N-1 if q >= p(N-2).
// With ascending breakpoints this equals the number of breakpoints that q
// reaches, so the block is N-1 parallel signed comparators (a thermometer
// code) followed by a population count. Purely combinational.
// The selection rule is the published one; comparators plus a count is this
// design's own, simplest realisation of it.
module pwl_comparer #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 8,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic signed [W-1:0] q,
  input  logic signed [W-1:0] bp [N-1],
  output logic [IW-1:0]       idx
);

  logic [N-2:0] ge;  // thermometer code: ge[j] = (q >= p_j)

  always_comb begin
    for (int j = 0; j < N - 1; j++) ge[j] = (q >= bp[j]);
  end

  always_comb begin
    idx = '0;
    for (int j = 0; j < N - 1; j++) idx = idx + IW'(ge[j]);
  end

endmodule
