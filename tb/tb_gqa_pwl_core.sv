// tb_gqa_pwl_core: self-checking test of the quantization-aware pwl core.
// Loads chord-fitted tables for GELU, HSWISH and EXP at several power-of-two
// input scales, streams every INT8 input back to back and compares each
// result with the integer reference k_i*q + b_i*2^s and the expected segment.
// Also checks the one-cycle latency and one-result-per-cycle rate, and the
// published breakpoint-deviation example (an EXP breakpoint at -0.815
// quantized to code -7 at S = 2^-3 and -2 at S = 2^-1) segment by segment.
module tb_gqa_pwl_core;
  import tb_pwl_fit_pkg::*;
  localparam int unsigned W = 8, IW = 3, YW = 17;

  logic clk = 0, rst_n = 0;
  logic lut_wr_en = 0;
  logic [IW-1:0] lut_wr_addr = '0;
  logic signed [W-1:0] lut_wr_k = '0, lut_wr_b = '0, lut_wr_p = '0;
  logic in_valid = 0;
  logic signed [W-1:0] q = '0;
  logic [2:0] shamt = '0;
  logic out_valid;
  logic signed [YW-1:0] y;
  logic [IW-1:0] seg;

  int checks = 0, failures = 0;

  gqa_pwl_core #(.N(8), .W(8), .LAMBDA(5), .SHIFT_W(3)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

  task automatic load(table_t t);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      lut_wr_en = 1; lut_wr_addr = IW'(i);
      lut_wr_k = W'(t.k[i]); lut_wr_b = W'(t.b[i]);
      lut_wr_p = (i < N - 1) ? W'(t.p[i]) : '0;
    end
    @(negedge clk);
    lut_wr_en = 0;
  endtask

  // expected results, in issue order
  int exp_y [$];
  int exp_seg [$];
  int issue_cycle [$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  // results are sampled half a cycle after the edge that produced them
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int ey, es, ic;
      if (exp_y.size() == 0) check(0, "unexpected out_valid");
      else begin
        ey = exp_y.pop_front(); es = exp_seg.pop_front(); ic = issue_cycle.pop_front();
        check(int'(y) == ey, $sformatf("y=%0d want %0d", y, ey));
        check(int'(seg) == es, $sformatf("seg=%0d want %0d", seg, es));
        check(cycle - ic == 1, $sformatf("latency %0d cycles, want 1", cycle - ic));
      end
    end
  end

  initial begin
    static func_e fs [3] = '{F_GELU, F_HSWISH, F_EXP};
    table_t t;
    int got;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (fs[n]) begin
      for (int s = 0; s <= 6; s += 2) begin
        if (fs[n] == F_EXP) t = fit(fs[n], -8.0, 0.0, s);
        else                t = fit(fs[n], -4.0, 4.0, s);
        load(t);
        for (int qv = -128; qv <= 127; qv++) begin
          @(negedge clk);
          in_valid = 1; q = W'(qv); shamt = 3'(s);
          exp_y.push_back(ref_core(t, qv, s));
          exp_seg.push_back(ref_seg(t, qv));
          issue_cycle.push_back(cycle);
        end
        @(negedge clk);
        in_valid = 0;
        repeat (3) @(negedge clk);
        check(exp_y.size() == 0, "results missing");
      end
    end
    // Breakpoint deviation example with published numbers: an EXP breakpoint
    // at -0.815 quantizes to -0.875 (code -7) at S = 2^-3 and to -1.000
    // (code -2) at S = 2^-1. It replaces the breakpoint at -1.0 (index 5) of
    // a uniform EXP table on (-4, 0); segment 6 must start exactly at the
    // quantized code.
    for (int s = 1; s <= 3; s += 2) begin
      automatic int want = (s == 3) ? -7 : -2;
      t = fit(F_EXP, -4.0, 0.0, s);
      t.p[5] = rnd_sat(-0.815 * (2.0 ** s), -128, 127);
      check(t.p[5] == want, $sformatf("quantized breakpoint %0d want %0d", t.p[5], want));
      load(t);
      for (int qv = want - 1; qv <= want; qv++) begin
        @(negedge clk);
        in_valid = 1; q = W'(qv); shamt = 3'(s);
        exp_y.push_back(ref_core(t, qv, s));
        exp_seg.push_back((qv < want) ? 5 : 6);
        issue_cycle.push_back(cycle);
      end
      @(negedge clk);
      in_valid = 0;
      repeat (3) @(negedge clk);
    end
    // throughput: 256 inputs back to back gave 256 results (counted above)
    got = checks;
    check(got > 3 * 4 * 256 * 3, "not every input produced a result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
