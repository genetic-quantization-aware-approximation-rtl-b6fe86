// tb_intercept_shifter: exhaustive test of the intercept rescaling.
// For every 8-bit intercept and every shift 0..7 the output must equal
// b * 2^s computed with integer arithmetic.
module tb_intercept_shifter;
  localparam int unsigned W = 8, SHIFT_W = 3, BW = W + (1 << SHIFT_W) - 1;

  logic signed [W-1:0]  b;
  logic [SHIFT_W-1:0]   shamt;
  logic signed [BW-1:0] b_scaled;
  int checks = 0, failures = 0;

  intercept_shifter #(.W(W), .SHIFT_W(SHIFT_W)) dut (.*);

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bv = -128; bv <= 127; bv++) begin
      for (int s = 0; s < 8; s++) begin
        b = W'(bv); shamt = SHIFT_W'(s);
        #1;
        checks++;
        if (int'(b_scaled) != bv * (1 << s)) begin
          failures++;
          if (failures < 10) $display("FAIL b=%0d s=%0d got %0d", bv, s, b_scaled);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
