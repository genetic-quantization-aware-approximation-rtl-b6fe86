// tb_pwl_lut: self-checking test of the pwl parameter table.
// Checks that reset clears every entry, that random writes are read back at
// every index (k, b) and on the breakpoint bus, that a write to the last entry
// leaves the breakpoints alone, and that rewriting one entry leaves the
// others unchanged. The expected contents are kept in a shadow array.
module tb_pwl_lut;
  localparam int unsigned N = 8, W = 8, IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [IW-1:0] wr_addr = '0, rd_idx = '0;
  logic signed [W-1:0] wr_k = '0, wr_b = '0, wr_p = '0;
  logic signed [W-1:0] rd_k, rd_b;
  logic signed [W-1:0] bp [N-1];

  int checks = 0, failures = 0;
  logic signed [W-1:0] ek [N], eb [N], ep [N-1];

  pwl_lut #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic write(int a, logic signed [W-1:0] k, logic signed [W-1:0] b,
                       logic signed [W-1:0] p);
    @(negedge clk);
    wr_en = 1; wr_addr = IW'(a); wr_k = k; wr_b = b; wr_p = p;
    @(negedge clk);
    wr_en = 0;
    ek[a] = k; eb[a] = b;
    if (a < N - 1) ep[a] = p;
  endtask

  task automatic check_all(string tag);
    for (int i = 0; i < N; i++) begin
      rd_idx = IW'(i);
      #1;
      check(rd_k == ek[i] && rd_b == eb[i],
            $sformatf("%s entry %0d k=%0d/%0d b=%0d/%0d", tag, i, rd_k, ek[i], rd_b, eb[i]));
    end
    for (int i = 0; i < N - 1; i++)
      check(bp[i] == ep[i], $sformatf("%s bp %0d = %0d, want %0d", tag, i, bp[i], ep[i]));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin ek[i] = 0; eb[i] = 0; end
    for (int i = 0; i < N - 1; i++) ep[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all("after reset");
    for (int round = 0; round < 4; round++) begin
      for (int i = 0; i < N; i++)
        write(i, W'($urandom), W'($urandom), W'($urandom));
      check_all($sformatf("round %0d", round));
    end
    // overwrite a single entry
    write(3, 8'sd17, -8'sd5, 8'sd99);
    check_all("single rewrite");
    // the last entry has no breakpoint: the bus must not change
    write(N - 1, 8'sd1, 8'sd2, -8'sd128);
    check_all("last entry");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
