// tb_mris_prescale: self-checking test of the multi-range input scaling.
// For DIV and RSQRT it drives values at and around every sub-range limit and
// random values spread over all octaves of the 24-bit input, and compares the
// sub-range, the scaled and clipped core input and the output shift with a
// reference written from the published sub-range table in real arithmetic.
// QUANT mode must pass the INT8 input through untouched.
module tb_mris_prescale;
  import gqa_pkg::*;
  localparam int unsigned W = 8, XW = 24;

  op_mode_e mode;
  logic signed [W-1:0] q_in, q_out;
  logic [XW-1:0] x_wide;
  logic [2:0] post_shift;
  sub_range_e sub_range;
  int checks = 0, failures = 0;
  int hit [4];

  mris_prescale #(.W(W), .XW(XW), .LAMBDA(5)) dut (.*);

  initial begin : watchdog
    #50_000_000;
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

  // reference: limits and scales of the published table
  task automatic run_one(op_mode_e m, int xv);
    real x = real'(xv) / 32.0;
    int r, sh, qq;
    if (m == MODE_DIV) begin
      if (x >= 256.0)     begin r = 3; sh = 6;  end
      else if (x >= 32.0) begin r = 2; sh = 6;  end
      else if (x >= 4.0)  begin r = 1; sh = 3;  end
      else                begin r = 0; sh = 0;  end
    end else begin
      if (x >= 1024.0)    begin r = 3; sh = 12; end
      else if (x >= 64.0) begin r = 2; sh = 8;  end
      else if (x >= 4.0)  begin r = 1; sh = 4;  end
      else                begin r = 0; sh = 0;  end
    end
    qq = int'($floor(real'(xv) / (2.0 ** sh) + 0.5));
    if (qq > 127) qq = 127;
    mode = m; x_wide = XW'(xv); q_in = W'($urandom);
    #1;
    hit[r]++;
    check(int'(sub_range) == r, $sformatf("mode %0d x=%0d range %0d want %0d", m, xv, sub_range, r));
    check(int'(q_out) == qq, $sformatf("mode %0d x=%0d q=%0d want %0d", m, xv, q_out, qq));
    check(int'(post_shift) == ((m == MODE_DIV) ? sh : sh / 2),
          $sformatf("mode %0d x=%0d post=%0d", m, xv, post_shift));
  endtask

  initial begin
    static op_mode_e ms [2] = '{MODE_DIV, MODE_RSQRT};
    static int lims [6] = '{4, 32, 256, 64, 1024, 4096};
    foreach (ms[n]) begin
      foreach (lims[l]) begin
        for (int d = -3; d <= 3; d++) run_one(ms[n], lims[l] * 32 + d);
      end
      for (int i = 0; i < 3000; i++) begin
        automatic int oct = $urandom_range(0, XW - 1);
        run_one(ms[n], int'($urandom_range(0, (1 << oct) - 1)) | (1 << oct));
      end
      run_one(ms[n], 0);
      run_one(ms[n], (1 << XW) - 1);
    end
    // QUANT mode: plain pass-through of the INT8 input
    for (int i = 0; i < 500; i++) begin
      automatic int qv = $urandom_range(0, 255) - 128;
      mode = MODE_QUANT; q_in = W'(qv); x_wide = XW'($urandom);
      #1;
      check(int'(q_out) == qv && post_shift == 0 && sub_range == RANGE_IR,
            $sformatf("quant q=%0d out=%0d", qv, q_out));
    end
    foreach (hit[r]) check(hit[r] > 0, $sformatf("sub-range %0d never used", r));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
