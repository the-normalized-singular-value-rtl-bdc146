// tb_rot_calc: checks the complete rotation calculation.
//  * Field checks on random blocks: lz = (l == 0), swap = 1 exactly when
//    c + b >= 0 (computed here), and l = 0 for both rotations on a block that
//    is already diagonal.
//  * Convergence: a random 2x2 block is rotated repeatedly in real arithmetic
//    with the rotations the circuit chooses (its inputs are the rounded
//    current block). After 12 rounds the off-diagonal part must be below 1%
//    of the norm of the block, as the two-sided Jacobi method requires.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_rot_calc;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int DW = 16;
  logic signed [DW-1:0] a, b, c, d;
  rot_t rot_theta, rot_Theta;
  int checks = 0, failures = 0;
  int nswap = 0, nplain = 0;

  rot_calc #(.DW(DW)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (a=%0d b=%0d c=%0d d=%0d)", what, a, b, c, d);
    end
  endtask

  initial begin
    real m [2][2], t [2][2], ra [2][2], rb [2][2];
    real off, tot, worst;
    worst = 0.0;
    for (int it = 0; it < 2000; it++) begin
      a = $urandom; b = $urandom; c = $urandom; d = $urandom;
      #1;
      chk(rot_theta.lz == (rot_theta.l == 0) && rot_Theta.lz == (rot_Theta.l == 0), "lz flag");
      chk(rot_theta.swap == ((int'(c) + int'(b)) >= 0) && rot_Theta.swap == rot_theta.swap, "form select");
      if (rot_theta.swap) nswap++; else nplain++;
      b = 0; c = 0;
      #1;
      chk(rot_theta.l == 0 && rot_Theta.l == 0, "diagonal block left alone");
    end
    chk(nswap > 0 && nplain > 0, "both forms used");
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++) m[i][j] = $urandom_range(16000, 0) - 8000.0;
      for (int r = 0; r < 12; r++) begin
        a = $rtoi(m[0][0]); b = $rtoi(m[0][1]); c = $rtoi(m[1][0]); d = $rtoi(m[1][1]);
        #1;
        rot_ref_matrix(int'(rot_theta.l), rot_theta.neg, rot_theta.swap, ra);
        rot_ref_matrix(int'(rot_Theta.l), rot_Theta.neg, rot_Theta.swap, rb);
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++)
            t[i][j] = ra[0][i] * m[0][j] + ra[1][i] * m[1][j];
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++)
            m[i][j] = t[i][0] * rb[0][j] + t[i][1] * rb[1][j];
      end
      off = m[0][1] * m[0][1] + m[1][0] * m[1][0];
      tot = off + m[0][0] * m[0][0] + m[1][1] * m[1][1];
      if (tot > 0.0 && off / tot > worst) worst = off / tot;
      chk(tot == 0.0 || off <= 1.0e-4 * tot + 4.0, "2x2 convergence");
    end
    $display("worst squared off-diagonal ratio after 12 rounds: %g", worst);
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
