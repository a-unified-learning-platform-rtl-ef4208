// tb_workload_random: synthetic random-instruction workload (1,000,000
// instructions, the size of the larger of the two random benchmarks) run
// through the three published forest configurations side by side:
// two classes with 10 trees, three classes with 100 trees, four classes with
// 100 trees. Each runs in its own dfs_e2e_harness with its own clock. The
// share of misclassified (too slow) instructions is set near the reported
// average inference error of each configuration: 2%, 6% and 15%. The
// Execute delay model is synthetic, so the printed speed-ups show that the
// mechanism works, not the figures of a real MIPS.
`timescale 1ns/1ps
module tb_workload_random;

  localparam int N = 1000000;

  logic d2, d3, d4;
  int c2, c3, c4, f2, f3, f4;
  int checks, failures;

  dfs_e2e_harness #(.NUM_CLASSES(2), .NUM_TREES(10),  .N_INSTR(N), .SHADOW_PS(1400), .MISS_PER256(5))  u2 (.done(d2), .checks(c2), .failures(f2));
  dfs_e2e_harness #(.NUM_CLASSES(3), .NUM_TREES(100), .N_INSTR(N), .SHADOW_PS(1400), .MISS_PER256(15)) u3 (.done(d3), .checks(c3), .failures(f3));
  dfs_e2e_harness #(.NUM_CLASSES(4), .NUM_TREES(100), .N_INSTR(N), .SHADOW_PS(700),  .MISS_PER256(38)) u4 (.done(d4), .checks(c4), .failures(f4));

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c3 + c4, f2 + f3 + f4 + 1);
    $finish;
  end

  initial begin
    wait (d2 && d3 && d4);
    checks   = c2 + c3 + c4;
    failures = f2 + f3 + f4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
