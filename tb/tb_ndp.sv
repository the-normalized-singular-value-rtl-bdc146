// tb_ndp: checks the off-diagonal processor: its update Sigma' = R_theta^T Sigma R_Theta,
// U^T' = R_theta^T U^T, V^T' = R_Theta^T V^T on random full-range 16-bit
// blocks and random rotations against real-valued products clamped to the
// 16-bit range (so saturation is covered as well); tolerance 8 LSB.
// The ndp only wraps apply_rot, so the checks are those of tb_apply_rot.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_ndp;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int DW = 16;
  logic signed [DW-1:0] sig_in [2][2], ut_in [2][2], vt_in [2][2];
  logic signed [DW-1:0] sig_out [2][2], ut_out [2][2], vt_out [2][2];
  rot_t rt_theta, rt_Theta;
  int checks = 0, failures = 0, saturated = 0;

  ndp #(.DW(DW)) dut (.*);

  `include "tb/apply_check.svh"

  initial begin
    for (int it = 0; it < 4000; it++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          sig_in[i][j] = $urandom;
          ut_in[i][j] = $urandom;
          vt_in[i][j] = $urandom;
        end
      rt_theta = rnd_rot();
      rt_Theta = rnd_rot();
      #1;
      check_apply();
    end
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation never exercised"); end
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
