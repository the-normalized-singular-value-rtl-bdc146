// tb_givens_double: checks the double rotation Y = R_theta^T * X * R_Theta on
// random 16-bit blocks with independent random theta and Theta against a
// real-valued product; the result must be within 8 LSB.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_givens_double;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int W = 16;
  logic signed [W-1:0] x [2][2];
  logic signed [W+3:0] y [2][2];
  rot_t rt_theta, rt_Theta;
  int checks = 0, failures = 0;

  givens_double #(.W(W)) dut (.x, .rt_theta, .rt_Theta, .y);

  function automatic rot_t rnd_rot();
    rot_t r;
    r.l = $urandom_range(20, 0);
    r.lz = (r.l == 0);
    r.neg = $urandom_range(1, 0);
    r.swap = $urandom_range(1, 0);
    return r;
  endfunction

  initial begin
    real a [2][2], b [2][2], t [2][2];
    real ex, e;
    for (int it = 0; it < 4000; it++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) x[i][j] = $urandom;
      rt_theta = rnd_rot();
      rt_Theta = rnd_rot();
      #1;
      rot_ref_matrix(int'(rt_theta.l), rt_theta.neg, rt_theta.swap, a);
      rot_ref_matrix(int'(rt_Theta.l), rt_Theta.neg, rt_Theta.swap, b);
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++)
          t[i][j] = a[0][i] * x[0][j] + a[1][i] * x[1][j];
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) begin
          ex = t[i][0] * b[0][j] + t[i][1] * b[1][j];
          e = y[i][j] - ex;
          checks++;
          if (e > 8.0 || e < -8.0) begin
            failures++;
            if (failures < 10) $display("FAIL [%0d][%0d]: %0d vs %f", i, j, y[i][j], ex);
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
