// tb_svd_ctrl: checks the sequencer at N = 8, SWEEPS = 2 (the defaults) and
// at N = 4, SWEEPS = 3: load is a one-cycle pulse on the start cycle, run is
// high for exactly SWEEPS*(N-1) cycles with step counting 0..N-2 in each
// sweep, done is a one-cycle pulse right after, busy covers start to done,
// and a start while busy is ignored.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_svd_ctrl;
  logic clk = 0, rst_n = 0;
  logic start8 = 0, start4 = 0;
  logic load8, run8, busy8, done8, load4, run4, busy4, done4;
  logic [2:0] step8;  logic [1:0] sweep8;
  logic [1:0] step4;  logic [1:0] sweep4;
  int checks = 0, failures = 0;

  svd_ctrl dut8 (.clk, .rst_n, .start(start8), .load(load8), .run(run8),
                 .busy(busy8), .done(done8), .step(step8), .sweep(sweep8));
  svd_ctrl #(.N(4), .SWEEPS(3)) dut4 (.clk, .rst_n, .start(start4), .load(load4),
                 .run(run4), .busy(busy4), .done(done4), .step(step4), .sweep(sweep4));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_one(input int n, input int sweeps, input bit extra_start);
    int runs = 0, loads = 0, dones = 0, cyc = 0;
    @(negedge clk);
    if (n == 8) start8 = 1; else start4 = 1;
    #1;
    chk((n == 8 ? load8 : load4) == 1, "load on start cycle");
    chk((n == 8 ? busy8 : busy4) == 1, "busy on start cycle");
    @(negedge clk);
    if (n == 8) start8 = extra_start; else start4 = extra_start;
    for (cyc = 0; cyc < 100; cyc++) begin
      #1;
      if (n == 8) begin
        if (run8) begin
          chk(int'(step8) == runs % 7 && int'(sweep8) == runs / 7, "step/sweep sequence");
          runs++;
        end
        loads += load8; chk(busy8, "busy while running");
        if (done8) begin dones++; break; end
      end else begin
        if (run4) begin
          chk(int'(step4) == runs % 3 && int'(sweep4) == runs / 3, "step/sweep sequence");
          runs++;
        end
        loads += load4; chk(busy4, "busy while running");
        if (done4) begin dones++; break; end
      end
      @(negedge clk);
    end
    start8 = 0; start4 = 0;
    chk(runs == sweeps * (n - 1), "number of steps");
    chk(loads == 0, "no second load while busy");
    chk(dones == 1 && cyc == sweeps * (n - 1), "done right after the last step");
    @(negedge clk); #1;
    chk((n == 8 ? done8 : done4) == 0, "done lasts one cycle");
    chk((n == 8 ? busy8 : busy4) == 0, "idle after done");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    #1 chk(!busy8 && !busy4 && !run8 && !done8, "idle after reset");
    run_one(8, 2, 0);
    run_one(8, 2, 1);
    run_one(4, 3, 0);
    run_one(4, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
