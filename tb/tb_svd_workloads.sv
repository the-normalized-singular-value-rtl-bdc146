// tb_svd_workloads: runs the SVD array on the three matrix sizes for which
// the paper reports throughput at 125 MHz: 41.7, 8.93 and 2.08 million
// matrices per second, i.e. 3, 14 and 60 clock cycles per matrix. These
// match real 4x4, 8x8 and 16x16 matrices with one rotation step per cycle
// (1 x 3, 2 x 7 and 4 x 15 steps), so the configurations run here are
//   * N = 4,  SWEEPS = 1 :  3 cycles
//   * N = 8,  SWEEPS = 2 : 14 cycles (the defaults)
//   * N = 16, SWEEPS = 4 : 60 cycles
// plus a 4x4 matrix zero-padded into the default 8x8 array, and the 8x8
// array with 8 sweeps, which must bring the off-diagonal norm below 10 % of
// its starting value (fast rotations converge linearly). Each harness
// (svd_workload_run) checks latency, reconstruction, orthogonality and that
// the off-diagonal norm does not grow.
module tb_svd_workloads;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  logic fin4, fin8, fin16, finp, fins;
  int c4, f4, c8, f8, c16, f16, cp, fp, cs, fs;
  int checks, failures;

  always #5 clk = ~clk;

  svd_workload_run #(.NA(4),  .M(4),  .SWEEPS(1)) w4  (.clk, .rst_n, .go, .fin(fin4),  .checks(c4),  .failures(f4));
  svd_workload_run #(.NA(8),  .M(8),  .SWEEPS(2)) w8  (.clk, .rst_n, .go, .fin(fin8),  .checks(c8),  .failures(f8));
  svd_workload_run #(.NA(16), .M(16), .SWEEPS(4)) w16 (.clk, .rst_n, .go, .fin(fin16), .checks(c16), .failures(f16));
  svd_workload_run #(.NA(8),  .M(4),  .SWEEPS(2)) wp  (.clk, .rst_n, .go, .fin(finp),  .checks(cp),  .failures(fp));
  svd_workload_run #(.NA(8),  .M(8),  .SWEEPS(8), .RUNS(6), .MAXOFF(0.1)) ws
                   (.clk, .rst_n, .go, .fin(fins), .checks(cs), .failures(fs));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    go = 1'b1;
    wait (fin4 && fin8 && fin16 && finp && fins);
    checks = c4 + c8 + c16 + cp + cs;
    failures = f4 + f8 + f16 + fp + fs;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c8 + c16 + cp + cs, f4 + f8 + f16 + fp + fs + 1);
    $finish;
  end
endmodule
