// tb_mris_postscale: self-checking test of the output rescaling.
// In the wide modes the output must equal y_in * 2^(POST_MAX - post_shift)
// for every allowed shift; in QUANT mode it must equal y_in.
module tb_mris_postscale;
  localparam int unsigned YW = 17, POST_MAX = 6, OW = YW + POST_MAX;

  logic signed [YW-1:0] y_in;
  logic wide;
  logic [2:0] post_shift;
  logic signed [OW-1:0] y_out;
  int checks = 0, failures = 0;

  mris_postscale #(.YW(YW), .POST_MAX(POST_MAX)) dut (.*);

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int edge_vals [5] = '{0, 1, -1, 65535, -65536};
    for (int i = 0; i < 4000; i++) begin
      automatic int yv = (i < 5) ? edge_vals[i] : int'($urandom_range(0, 131071)) - 65536;
      automatic int s  = $urandom_range(0, POST_MAX);
      automatic bit w  = (i % 3) != 0;
      y_in = YW'(yv); wide = w; post_shift = 3'(s);
      #1;
      checks++;
      if (int'(y_out) != (w ? yv * (1 << (POST_MAX - s)) : yv)) begin
        failures++;
        if (failures < 10) $display("FAIL y=%0d wide=%0d s=%0d out=%0d", yv, w, s, y_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
