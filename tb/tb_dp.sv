// tb_dp: checks the diagonal processor at the width used inside the array
// (32 bits; Sigma holds the input shifted left by 12, U^T and V^T hold 1.0 as
// 2^30). A random 16-bit 2x2 block is loaded and the processor's outputs
// are fed back for 12 steps, as if the block never left the processor.
//  * Every step: the outputs equal the real-valued update with the rotations
//    the processor itself sends out (rt_theta / rt_Theta), within 16 LSB.
//  * After 12 steps: the off-diagonal part of Sigma is below 1% of its norm,
//    and U * Sigma * V^T reproduces the input within 0.1%.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_dp;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int DW = 32;
  localparam real ONE = 1073741824.0;   // 2^30
  logic signed [DW-1:0] sig_in [2][2], ut_in [2][2], vt_in [2][2];
  logic signed [DW-1:0] sig_out [2][2], ut_out [2][2], vt_out [2][2];
  rot_t rt_theta, rt_Theta;
  int checks = 0, failures = 0, saturated = 0;

  dp #(.DW(DW)) dut (.*);

  `include "tb/apply_check.svh"

  initial begin
    real a0 [2][2], rec, off, tot, err, nrm;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          a0[i][j] = $urandom_range(65535, 0) - 32768.0;
          sig_in[i][j] = $rtoi(a0[i][j]) <<< 12;
          ut_in[i][j] = (i == j) ? 32'sd1 <<< 30 : 0;
          vt_in[i][j] = (i == j) ? 32'sd1 <<< 30 : 0;
        end
      for (int s = 0; s < 12; s++) begin
        #1;
        check_apply();
        sig_in = sig_out; ut_in = ut_out; vt_in = vt_out;
      end
      #1;
      off = 1.0 * sig_in[0][1] * sig_in[0][1] + 1.0 * sig_in[1][0] * sig_in[1][0];
      tot = off + 1.0 * sig_in[0][0] * sig_in[0][0] + 1.0 * sig_in[1][1] * sig_in[1][1];
      checks++;
      if (off > 1.0e-4 * tot + 1.0e8) begin
        failures++;
        if (failures < 10) $display("FAIL convergence: off %g tot %g", off, tot);
      end
      // A = U Sigma V^T with U = (U^T)^T
      err = 0.0; nrm = 0.0;
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          rec = 0.0;
          for (int k = 0; k < 2; k++)
            for (int m = 0; m < 2; m++)
              rec += (ut_in[k][i] / ONE) * sig_in[k][m] * (vt_in[m][j] / ONE);
          rec = rec / 4096.0;
          err += (rec - a0[i][j]) * (rec - a0[i][j]);
          nrm += a0[i][j] * a0[i][j];
        end
      checks++;
      if (err > 1.0e-6 * nrm + 1.0) begin
        failures++;
        if (failures < 10) $display("FAIL reconstruction: err %g nrm %g", err, nrm);
      end
    end
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
