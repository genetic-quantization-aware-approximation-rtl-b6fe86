// tb_operator_accuracy: operator-level accuracy workload.
//
// Runs the accuracy sweep of op_accuracy_runner on two instances of the
// non-linear unit, with 8 and with 16 table entries (both published
// configurations of the INT8 unit), and checks:
//  - every output matches the reference model bit for bit;
//  - every operator's MSE stays below 1.1e-2, the largest 8-entry INT8 MSE
//    published for these operators, even with the plain uniform-chord tables
//    used here (an offline breakpoint search gives lower errors);
//  - the 16-entry table is at least as accurate as the 8-entry one on the
//    smooth operators.
module tb_operator_accuracy;
  import tb_pwl_fit_pkg::*;

  logic done8, done16;
  int checks8, failures8, checks16, failures16;
  real mse8 [5], mse16 [5];
  int checks = 0, failures = 0;

  op_accuracy_runner #(.NE(8))  r8  (.done(done8),  .checks(checks8),  .failures(failures8),  .mse(mse8));
  op_accuracy_runner #(.NE(16)) r16 (.done(done16), .checks(checks16), .failures(failures16), .mse(mse16));

  initial begin : watchdog
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static string names [5] = '{"GELU", "HSWISH", "EXP", "DIV", "RSQRT"};
    wait (done8 && done16);
    checks   = checks8 + checks16;
    failures = failures8 + failures16;
    for (int f = 0; f < 5; f++) begin
      $display("%-6s  average MSE  8 entries %e   16 entries %e", names[f], mse8[f], mse16[f]);
      checks++;
      if (!(mse8[f] < 1.1e-2 && mse16[f] < 1.1e-2)) begin
        failures++;
        $display("FAIL %s MSE above 1.1e-2", names[f]);
      end
      checks++;
      if (!(mse16[f] <= mse8[f] * 1.05)) begin
        failures++;
        $display("FAIL %s: 16 entries less accurate than 8", names[f]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
