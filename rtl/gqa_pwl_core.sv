// gqa_pwl_core: quantization-aware N-entry LUT-based piece-wise linear unit.
//
// Computes, for a signed integer input q with power-of-two scale S = 2^-s,
//   y = k_i * q + (b_i << s),  i = segment of q among the quantized breakpoints,
// which equals pwl(S*q) / S with LAMBDA fraction bits: the real result is
// y * S * 2^-LAMBDA. Since S is a power of two, the only run-time correction
// the table needs is the shift of the intercept; breakpoints are stored
// already quantized to q's grid. This is the published INT8 unit; its
// structure (comparer -> index -> table -> multiplier -> adder) follows the
// published block diagram.
//
// Interface: table write port (lut_*), then in_valid/q/shamt in, and
// out_valid/y/seg out. Timing: the comparer, table read, shifter and
// multiply-add are one combinational path ending in a register, so y appears
// one cycle after q, one result per cycle. The single register stage and the
// reset values are this design's choices (the published unit is only said to
// run at 500 MHz).
module gqa_pwl_core #(
  parameter int unsigned N       = 8,
  parameter int unsigned W       = 8,
  parameter int unsigned LAMBDA  = gqa_pkg::LAMBDA_DEF,
  parameter int unsigned SHIFT_W = 3,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned BW = W + (1 << SHIFT_W) - 1,
  localparam int unsigned YW = 2 * W + 1
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
  input  logic signed [W-1:0]  q,
  input  logic [SHIFT_W-1:0]   shamt,
  // result
  output logic                 out_valid,
  output logic signed [YW-1:0] y,
  output logic [IW-1:0]        seg
);

  logic [IW-1:0]        idx;
  logic signed [W-1:0]  bp [N-1];
  logic signed [W-1:0]  k_sel, b_sel;
  logic signed [BW-1:0] b_scaled;
  logic signed [YW-1:0] y_d;

  pwl_comparer #(.N(N), .W(W)) u_cmp (
    .q   (q),
    .bp  (bp),
    .idx (idx)
  );

  pwl_lut #(.N(N), .W(W)) u_lut (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (lut_wr_en),
    .wr_addr (lut_wr_addr),
    .wr_k    (lut_wr_k),
    .wr_b    (lut_wr_b),
    .wr_p    (lut_wr_p),
    .rd_idx  (idx),
    .rd_k    (k_sel),
    .rd_b    (b_sel),
    .bp      (bp)
  );

  intercept_shifter #(.W(W), .SHIFT_W(SHIFT_W)) u_shift (
    .b        (b_sel),
    .shamt    (shamt),
    .b_scaled (b_scaled)
  );

  pwl_mac #(.W(W), .BW(BW)) u_mac (
    .q        (q),
    .k        (k_sel),
    .b_scaled (b_scaled),
    .y        (y_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      seg       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y   <= y_d;
        seg <= idx;
      end
    end
  end

  // LAMBDA only documents the output format here; keep it meaningful.
  initial assert (LAMBDA < W)
    else $error("gqa_pwl_core: LAMBDA=%0d must be below W=%0d", LAMBDA, W);

endmodule
