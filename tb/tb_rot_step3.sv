// tb_rot_step3: exhaustive check of step 3 of the rotation calculation over
// all l_alpha, l_beta in 0..20 and all flag combinations. The reference is the
// case table of the algorithm written with plain integers here:
// diagonal block -> (0,0); N2=0 -> (l_alpha,l_alpha); N1=0 -> (l_beta,l_beta);
// l_beta-l_alpha = -1 -> (l_beta-Bb, l_alpha); +1 -> (l_alpha-Bb, l_beta);
// 0 -> (l_beta-1, 0); otherwise (min, min); exchanged when sgn_x = 1.
// Also counts that every case occurred.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_rot_step3;
  import nsvd_pkg::*;
  lexp_t l_alpha, l_beta, l_theta, l_Theta;
  logic n1z, n2z, bb, sgn_x, diff_neg;
  int checks = 0, failures = 0;
  int seen [7];

  rot_step3 dut (.*);

  initial begin
    int la, lb, eT, et, cs, tmp;
    for (la = 0; la <= 20; la++)
      for (lb = 0; lb <= 20; lb++)
        for (int f = 0; f < 16; f++) begin
          l_alpha = la; l_beta = lb;
          {n1z, n2z, bb, sgn_x} = f[3:0];
          #1;
          if (n1z && n2z)        begin eT = 0;       et = 0;  cs = 0; end
          else if (n2z)          begin eT = la;      et = la; cs = 1; end
          else if (n1z)          begin eT = lb;      et = lb; cs = 2; end
          else if (lb - la == -1) begin eT = lb - bb; et = la; cs = 3; end
          else if (lb - la == 1) begin eT = la - bb; et = lb; cs = 4; end
          else if (lb == la)     begin eT = lb - 1;  et = 0;  cs = 5; end
          else begin eT = (la < lb) ? la : lb; et = eT; cs = 6; end
          if (sgn_x) begin tmp = eT; eT = et; et = tmp; end
          eT = eT & ((1 << LW) - 1);
          et = et & ((1 << LW) - 1);
          seen[cs]++;
          checks++;
          if (int'(l_Theta) != eT || int'(l_theta) != et || diff_neg != (lb < la)) begin
            failures++;
            if (failures < 10)
              $display("FAIL la=%0d lb=%0d flags=%b: got (%0d,%0d,%b) expected (%0d,%0d)",
                       la, lb, f[3:0], l_Theta, l_theta, diff_neg, eT, et);
          end
        end
    for (int i = 0; i < 7; i++) begin
      checks++;
      if (seen[i] == 0) begin failures++; $display("FAIL case %0d never seen", i); end
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
