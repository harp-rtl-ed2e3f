// tb_wv_workloads: the two array configurations evaluated for the method,
// programmed column by column with HD-PV and with HARP.
//
//   * 32 x 32 array, 9-bit ADC (the default configuration of the macro).
//   * 64 x 64 array, 10-bit ADC (N = 64; the same RTL with N and NBITS set).
// Both use 6-bit signed weights in 3-bit cells, K = 2, tau_w = 4 and at most
// 50 sweeps, with about 0.7 LSB of read noise. Each size runs
// tb_wv_column_study on random columns, which checks convergence, accuracy
// and the comparison counts, and prints the mean sweeps, comparator
// decisions, write pulses and cycles of both modes.
// A watchdog ends the bench with a failure if the studies do not finish.
module tb_wv_workloads;
  logic clk = 0, rst_n = 0;
  logic fin32, fin64;
  int ck32, fl32, ck64, fl64;
  int checks, failures;

  always #5 clk = ~clk;

  tb_wv_column_study #(.N(32), .NBITS(9),  .RUNS(16)) s32 (.clk, .rst_n, .finished(fin32), .checks(ck32), .failures(fl32));
  tb_wv_column_study #(.N(64), .NBITS(10), .RUNS(16)) s64 (.clk, .rst_n, .finished(fin64), .checks(ck64), .failures(fl64));

  initial begin
    #50000000;
    checks = ck32 + ck64 + 1;
    failures = fl32 + fl64 + 1;
    $display("watchdog: studies did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (fin32 && fin64);
    checks = ck32 + ck64;
    failures = fl32 + fl64;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
