// tb_givens_single: checks both orientations of the single fast rotation
// (Y = X*R and Y = R^T*X) on random 16-bit blocks and random rotations
// (l = 0..20, both signs, plain and swapped form) against real-valued matrix
// products; the result must be within 4 LSB.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_givens_single;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int W = 16;
  logic signed [W-1:0] x [2][2];
  logic signed [W+1:0] yr [2][2], yl [2][2];
  rot_t rt;
  int checks = 0, failures = 0;

  givens_single #(.W(W), .LEFT(1'b0)) dut_r (.x, .rt, .y(yr));
  givens_single #(.W(W), .LEFT(1'b1)) dut_l (.x, .rt, .y(yl));

  initial begin
    real r [2][2];
    real er, el, e;
    for (int it = 0; it < 4000; it++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) x[i][j] = $urandom;
      rt.l = $urandom_range(20, 0);
      rt.lz = (rt.l == 0);
      rt.neg = $urandom_range(1, 0);
      rt.swap = $urandom_range(1, 0);
      #1;
      rot_ref_matrix(int'(rt.l), rt.neg, rt.swap, r);
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          er = x[i][0] * r[0][j] + x[i][1] * r[1][j];   // (X R)[i][j]
          el = r[0][i] * x[0][j] + r[1][i] * x[1][j];   // (R^T X)[i][j]
          checks += 2;
          e = yr[i][j] - er;
          if (e > 4.0 || e < -4.0) begin
            failures++;
            if (failures < 10) $display("FAIL XR l=%0d neg=%b swap=%b [%0d][%0d]: %0d vs %f", rt.l, rt.neg, rt.swap, i, j, yr[i][j], er);
          end
          e = yl[i][j] - el;
          if (e > 4.0 || e < -4.0) begin
            failures++;
            if (failures < 10) $display("FAIL RtX l=%0d neg=%b swap=%b [%0d][%0d]: %0d vs %f", rt.l, rt.neg, rt.swap, i, j, yl[i][j], el);
          end
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
