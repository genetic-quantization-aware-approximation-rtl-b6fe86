// tb_pwl_mac: test of the multiply-add y = k*q + b~.
// Exhaustive over k and q for a set of intercepts including the extremes of
// the 15-bit rescaled intercept; the reference is plain integer arithmetic.
module tb_pwl_mac;
  localparam int unsigned W = 8, BW = 15, YW = 2 * W + 1;

  logic signed [W-1:0]  q, k;
  logic signed [BW-1:0] b_scaled;
  logic signed [YW-1:0] y;
  int checks = 0, failures = 0;

  pwl_mac #(.W(W), .BW(BW)) dut (.*);

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int bvals [6] = '{0, 1, -1, 16383, -16384, 1234};
    foreach (bvals[n]) begin
      for (int kv = -128; kv <= 127; kv++) begin
        for (int qv = -128; qv <= 127; qv++) begin
          k = W'(kv); q = W'(qv); b_scaled = BW'(bvals[n]);
          #1;
          checks++;
          if (int'(y) != kv * qv + bvals[n]) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d q=%0d b=%0d y=%0d", kv, qv, bvals[n], y);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
