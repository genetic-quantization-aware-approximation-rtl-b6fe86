// tb_pwl_comparer: self-checking test of segment selection.
// For random ascending breakpoint sets (with repeats allowed) and every
// signed 8-bit input, the index is compared with a reference that scans the
// piece-wise definition: first i with q < p_i, or N-1 past the last one.
module tb_pwl_comparer;
  localparam int unsigned N = 8, W = 8, IW = $clog2(N);

  logic signed [W-1:0] q;
  logic signed [W-1:0] bp [N-1];
  logic [IW-1:0] idx;
  int checks = 0, failures = 0;

  pwl_comparer #(.N(N), .W(W)) dut (.*);

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_idx(int qv, int p[N-1]);
    for (int i = 0; i < N - 1; i++) if (qv < p[i]) return i;
    return N - 1;
  endfunction

  initial begin
    int p [N-1];
    for (int set = 0; set < 40; set++) begin
      // ascending breakpoints: random increments from a random start
      p[0] = -128 + int'($urandom_range(0, 60));
      for (int i = 1; i < N - 1; i++) p[i] = p[i-1] + int'($urandom_range(0, 35));
      for (int i = 0; i < N - 1; i++) begin
        if (p[i] > 127) p[i] = 127;
        bp[i] = W'(p[i]);
      end
      for (int qv = -128; qv <= 127; qv++) begin
        q = W'(qv);
        #1;
        checks++;
        if (int'(idx) != ref_idx(qv, p)) begin
          failures++;
          if (failures < 10) $display("FAIL set %0d q=%0d idx=%0d want %0d", set, qv, idx, ref_idx(qv, p));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
