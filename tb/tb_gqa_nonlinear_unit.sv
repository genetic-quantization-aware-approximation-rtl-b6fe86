// tb_gqa_nonlinear_unit: end-to-end test of the non-linear unit at its
// default size (8 entries, INT8, LAMBDA = 5, 24-bit wide input).
//
// One complete operation per operator: the table is loaded with a
// chord-fitted GELU, HSWISH or EXP table for a given input scale S = 2^-s and
// every INT8 input is streamed back to back; then a reciprocal (DIV) and a
// reciprocal square root (RSQRT) table are loaded and wide fixed-point inputs
// covering all sub-ranges are streamed. Every result is compared bit-exactly
// with a reference model (sub-range table, integer segment equation, output
// shift) and, for the wide modes, its real value with the exact function.
// The latency (2 cycles) and the one-result-per-cycle rate are checked.
// Mechanisms counted, each must occur: QUANT/DIV/RSQRT mode, each sub-range
// IR/SR0/SR1/SR2 in both wide modes, input clipping after scaling, table
// reload between operators, and back-to-back issue.
module tb_gqa_nonlinear_unit;
  import gqa_pkg::*;
  import tb_pwl_fit_pkg::*;
  localparam int W = 8, IW = 3, XW = 24, OW = 23;

  logic clk = 0, rst_n = 0;
  logic lut_wr_en = 0;
  logic [IW-1:0] lut_wr_addr = '0;
  logic signed [W-1:0] lut_wr_k = '0, lut_wr_b = '0, lut_wr_p = '0;
  logic in_valid = 0;
  op_mode_e mode = MODE_QUANT;
  logic [2:0] scale_exp = '0;
  logic signed [W-1:0] q = '0;
  logic [XW-1:0] x_wide = '0;
  logic out_valid;
  logic signed [OW-1:0] y;
  logic [IW-1:0] out_seg;
  sub_range_e out_sub_range;

  int checks = 0, failures = 0;

  gqa_nonlinear_unit dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // mechanism counters
  int n_mode [3];
  int n_range [2][4];
  int n_clip, n_reload, n_b2b;
  real worst_rel [2];

  int cycle = 0;
  always @(posedge clk) cycle++;

  typedef struct {
    int y; int seg; int rng; int cyc; bit wide; int func; real xr;
  } exp_t;
  exp_t expq [$];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected out_valid");
      else begin
        e = expq.pop_front();
        check(int'(y) == e.y, $sformatf("y=%0d want %0d (x=%f)", y, e.y, e.xr));
        check(int'(out_seg) == e.seg, $sformatf("seg=%0d want %0d", out_seg, e.seg));
        check(cycle - e.cyc == 2, $sformatf("latency %0d, want 2", cycle - e.cyc));
        if (e.wide) begin
          automatic real yr = real'(y) / (2.0 ** 16);
          automatic real fr = fref(func_e'(e.func), e.xr);
          automatic real rel = (yr - fr) / fr;
          automatic int w = (e.func == F_DIV) ? 0 : 1;
          if (rel < 0) rel = -rel;
          check(int'(out_sub_range) == e.rng, $sformatf("range %0d want %0d", out_sub_range, e.rng));
          // accuracy where scaling brings x back into the fitted interval:
          // DIV x in [0.5, 256) and RSQRT x in [0.25, 16384); beyond, the
          // scaled input exceeds 4 and is clipped (the result saturates)
          if ((e.func == F_DIV && e.xr >= 0.5 && e.xr < 256.0) ||
              (e.func == F_RSQRT && e.xr >= 0.25 && e.xr < 16384.0)) begin
            if (rel > worst_rel[w]) worst_rel[w] = rel;
            check(rel < 0.25, $sformatf("func %0d x=%f y=%f want %f", e.func, e.xr, yr, fr));
          end
        end
      end
    end
  end

  task automatic load(table_t t);
    n_reload++;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      lut_wr_en = 1; lut_wr_addr = IW'(i);
      lut_wr_k = W'(t.k[i]); lut_wr_b = W'(t.b[i]);
      lut_wr_p = (i < N - 1) ? W'(t.p[i]) : '0;
    end
    @(negedge clk);
    lut_wr_en = 0;
  endtask

  task automatic drain();
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    check(expq.size() == 0, "results missing after drain");
  endtask

  // independent reference of the wide path: sub-range, scaled input, shift
  task automatic issue_wide(table_t t, func_e f, int xv);
    exp_t e;
    real x = real'(xv) / 32.0;
    int r, sh, qq, post, yc;
    op_mode_e m = (f == F_DIV) ? MODE_DIV : MODE_RSQRT;
    if (f == F_DIV) begin
      if (x >= 256.0) begin r = 3; sh = 6; end else if (x >= 32.0) begin r = 2; sh = 6; end
      else if (x >= 4.0) begin r = 1; sh = 3; end else begin r = 0; sh = 0; end
      post = sh;
    end else begin
      if (x >= 1024.0) begin r = 3; sh = 12; end else if (x >= 64.0) begin r = 2; sh = 8; end
      else if (x >= 4.0) begin r = 1; sh = 4; end else begin r = 0; sh = 0; end
      post = sh / 2;
    end
    qq = int'($floor(real'(xv) / (2.0 ** sh) + 0.5));
    if (qq > 127) begin qq = 127; n_clip++; end
    yc = ref_core(t, qq, LAMBDA);
    e.y = yc * (2 ** (6 - post)); e.seg = ref_seg(t, qq); e.rng = r;
    e.wide = 1; e.func = f; e.xr = x;
    @(negedge clk);
    if (in_valid) n_b2b++;
    in_valid = 1; mode = m; x_wide = XW'(xv); q = W'($urandom);
    e.cyc = cycle;
    expq.push_back(e);
    n_mode[m]++;
    n_range[(f == F_DIV) ? 0 : 1][r]++;
  endtask

  task automatic issue_quant(table_t t, int qv, int s);
    exp_t e;
    e.y = ref_core(t, qv, s); e.seg = ref_seg(t, qv); e.rng = 0;
    e.wide = 0; e.func = 0; e.xr = 0.0;
    @(negedge clk);
    if (in_valid) n_b2b++;
    in_valid = 1; mode = MODE_QUANT; q = W'(qv); scale_exp = 3'(s); x_wide = XW'($urandom);
    e.cyc = cycle;
    expq.push_back(e);
    n_mode[MODE_QUANT]++;
  endtask

  initial begin
    static func_e qf [3] = '{F_GELU, F_HSWISH, F_EXP};
    static func_e wf [2] = '{F_DIV, F_RSQRT};
    table_t t;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // GELU / HSWISH / EXP on INT8 inputs at S = 2^0 .. 2^-6
    foreach (qf[n]) begin
      for (int s = 0; s <= 6; s++) begin
        t = (qf[n] == F_EXP) ? fit(qf[n], -8.0, 0.0, s) : fit(qf[n], -4.0, 4.0, s);
        load(t);
        for (int qv = -128; qv <= 127; qv++) issue_quant(t, qv, s);
        drain();
      end
    end
    // DIV on (0.5, 4), RSQRT on (0.25, 4), wide inputs over all sub-ranges
    foreach (wf[n]) begin
      t = (wf[n] == F_DIV) ? fit(wf[n], 0.5, 4.0, LAMBDA) : fit(wf[n], 0.25, 4.0, LAMBDA);
      load(t);
      for (int i = 0; i < 2000; i++) begin
        // inputs from 0.5 (16/32) upwards, log-spread over the 24-bit range
        automatic int oct = $urandom_range(4, XW - 1);
        issue_wide(t, wf[n], int'($urandom_range(0, (1 << oct) - 1)) | (1 << oct));
      end
      drain();
    end
    $display("worst relative error inside the fitted range: DIV %f RSQRT %f",
             worst_rel[0], worst_rel[1]);
    $display("mechanisms: quant=%0d div=%0d rsqrt=%0d clip=%0d reload=%0d back_to_back=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_clip, n_reload, n_b2b);
    for (int m = 0; m < 3; m++) check(n_mode[m] > 0, $sformatf("mode %0d never used", m));
    for (int w = 0; w < 2; w++)
      for (int r = 0; r < 4; r++) begin
        $display("  %s sub-range %0d used %0d times", (w != 0) ? "RSQRT" : "DIV", r, n_range[w][r]);
        check(n_range[w][r] > 0, $sformatf("wide op %0d sub-range %0d never used", w, r));
      end
    check(n_clip > 0, "clipping never happened");
    check(n_reload > 1, "table never reloaded");
    check(n_b2b > 0, "no back-to-back issue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
