// pwl_lut: parameter table of the N-entry piece-wise linear unit.
//
// Holds N slopes k_i and N intercepts b_i (signed W-bit fixed point with
// LAMBDA fraction bits) and N-1 breakpoints p~_i that are already quantized to
// the integer grid of the input (p~_i = round(clip(p_i / S))). Because the
// breakpoints are stored quantized while the slopes and intercepts are stored
// as found by the offline search, only the intercepts need run-time rescaling
// (done outside, by a shifter). That split is the published method; the
// layout (k/b pairs indexed by segment, breakpoints in a separate column that
// is read as a whole) follows the published block diagram.
//
// Interface: one entry is written per cycle through wr_en/wr_addr/wr_k/wr_b/
// wr_p (wr_p is ignored for the last entry, which has no upper breakpoint).
// Reads are combinational: rd_k/rd_b at rd_idx, and every breakpoint on bp.
// The write port, the flip-flop storage and the clear on reset are this
// design's own choices. The host must write breakpoints in ascending order.
module pwl_lut #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 8,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [IW-1:0]       wr_addr,
  input  logic signed [W-1:0] wr_k,
  input  logic signed [W-1:0] wr_b,
  input  logic signed [W-1:0] wr_p,
  input  logic [IW-1:0]       rd_idx,
  output logic signed [W-1:0] rd_k,
  output logic signed [W-1:0] rd_b,
  output logic signed [W-1:0] bp [N-1]
);

  logic signed [W-1:0] k_q [N];
  logic signed [W-1:0] b_q [N];
  logic signed [W-1:0] p_q [N-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        k_q[i] <= '0;
        b_q[i] <= '0;
      end
      for (int i = 0; i < N - 1; i++) p_q[i] <= '0;
    end else if (wr_en) begin
      k_q[wr_addr] <= wr_k;
      b_q[wr_addr] <= wr_b;
      if (32'(wr_addr) < N - 1) p_q[wr_addr] <= wr_p;
    end
  end

  assign rd_k = k_q[rd_idx];
  assign rd_b = b_q[rd_idx];
  assign bp   = p_q;

  // A write must address an existing entry.
  a_wr_addr: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_en |-> 32'(wr_addr) < N);

endmodule
