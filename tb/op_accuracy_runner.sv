// op_accuracy_runner: drives one gqa_nonlinear_unit with NE table entries
// through the operator-level accuracy sweep and reports the mean squared
// error of each operator.
//
// GELU and HSWISH (fitted on (-4,4)) and EXP (fitted on (-8,0)) are run at
// every input scale S = 2^0 .. 2^-6; the inputs are all INT8 codes q (EXP:
// q <= 0, its use after max subtraction), i.e. the dequantized range
// [Qn*S, Qp*S] with step S. DIV (fitted on (0.5,4)) and RSQRT (fitted on
// (0.25,4)) are run on wide fixed-point inputs spread geometrically over the
// range where scaling brings them back into the fitted interval. Each result
// is also compared bit-exactly with the reference model. The MSE of an
// operator is the mean over its scales of the per-scale MSE.
module op_accuracy_runner
  import gqa_pkg::*;
  import tb_pwl_fit_pkg::*;
#(
  parameter int NE = 8
) (
  output logic done,
  output int   checks,
  output int   failures,
  output real  mse [5]
);
  localparam int W = 8, IW = $clog2(NE), XW = 24, OW = 23;

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

  gqa_nonlinear_unit #(.N(NE)) dut (.*);

  always #5 clk = ~clk;

  typedef struct { int y; int seg; real x; real scale; } exp_t;
  exp_t expq [$];
  func_e cur_f;
  real   err_sum;
  int    err_n;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [%0d entries] %s", NE, what);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      if (expq.size() == 0) check(0, "unexpected out_valid");
      else begin
        automatic real yr, d;
        e  = expq.pop_front();
        check(int'(y) == e.y && int'(out_seg) == e.seg,
              $sformatf("f=%0d x=%f y=%0d/%0d seg=%0d/%0d", cur_f, e.x, y, e.y, out_seg, e.seg));
        yr = real'(y) * e.scale;
        d  = yr - fref(cur_f, e.x);
        err_sum += d * d;
        err_n++;
      end
    end
  end

  task automatic load(table_t t);
    for (int i = 0; i < NE; i++) begin
      @(negedge clk);
      lut_wr_en = 1; lut_wr_addr = IW'(i);
      lut_wr_k = W'(t.k[i]); lut_wr_b = W'(t.b[i]);
      lut_wr_p = (i < NE - 1) ? W'(t.p[i]) : '0;
    end
    @(negedge clk);
    lut_wr_en = 0;
  endtask

  task automatic drain();
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    check(expq.size() == 0, "results missing");
  endtask

  initial begin
    static func_e qf [3] = '{F_GELU, F_HSWISH, F_EXP};
    static func_e wf [2] = '{F_DIV, F_RSQRT};
    table_t t;
    done = 0; checks = 0; failures = 0;
    foreach (mse[i]) mse[i] = 0.0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (qf[n]) begin
      cur_f = qf[n];
      for (int s = 0; s <= 6; s++) begin
        t = (qf[n] == F_EXP) ? fit(qf[n], -8.0, 0.0, s, NE) : fit(qf[n], -4.0, 4.0, s, NE);
        load(t);
        err_sum = 0.0; err_n = 0;
        for (int qv = -128; qv <= ((qf[n] == F_EXP) ? 0 : 127); qv++) begin
          exp_t e;
          e.y = ref_core(t, qv, s, NE); e.seg = ref_seg(t, qv, NE);
          e.x = real'(qv) / (2.0 ** s);
          e.scale = 1.0 / (2.0 ** (s + LAMBDA));
          @(negedge clk);
          in_valid = 1; mode = MODE_QUANT; q = W'(qv); scale_exp = 3'(s);
          expq.push_back(e);
        end
        drain();
        $display("[%0d entries] %-6s S=2^-%0d  MSE %e", NE, qf[n].name(), s, err_sum / err_n);
        mse[qf[n]] += err_sum / err_n / 7.0;
      end
    end
    foreach (wf[n]) begin
      int xv, lim;
      cur_f = wf[n];
      t = (wf[n] == F_DIV) ? fit(wf[n], 0.5, 4.0, LAMBDA, NE) : fit(wf[n], 0.25, 4.0, LAMBDA, NE);
      load(t);
      err_sum = 0.0; err_n = 0;
      xv  = (wf[n] == F_DIV) ? 16 : 8;           // 0.5 / 0.25
      lim = (wf[n] == F_DIV) ? 256 * 32 : 16384 * 32;
      while (xv < lim) begin
        exp_t e;
        automatic wide_ref_t r = ref_wide(t, wf[n], xv, NE);
        e.y = r.y; e.seg = r.seg; e.x = real'(xv) / 32.0; e.scale = 1.0 / (2.0 ** 16);
        @(negedge clk);
        in_valid = 1; mode = (wf[n] == F_DIV) ? MODE_DIV : MODE_RSQRT; x_wide = XW'(xv);
        expq.push_back(e);
        xv += (xv / 64 > 0) ? xv / 64 : 1;
      end
      drain();
      $display("[%0d entries] %-6s wide range  MSE %e", NE, wf[n].name(), err_sum / err_n);
      mse[wf[n]] = err_sum / err_n;
    end
    done = 1;
  end
endmodule
