// tb_rot_step4: exhaustive check of the sign logic of step 4 over all 128
// input combinations. The reference works with angle signs as +1/-1:
// alpha has sign S_N1*S_D1, beta S_N2*S_D2; the dominant one (beta when
// l_beta < l_alpha and N2 != 0, otherwise alpha) gives Theta its sign, and
// theta gets the same sign, the opposite (N1 = 0), or the sign times
// Sign(l_beta - l_alpha) in the general case.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_rot_step4;
  logic diff_neg, n1z, n2z, sn1, sd1, sn2, sd2, s_theta, s_Theta;
  int checks = 0, failures = 0;

  rot_step4 dut (.*);

  function automatic int sg(input bit b);   // sign bit -> +1 / -1
    return b ? -1 : 1;
  endfunction

  initial begin
    int sa, sbeta, s, eT, et, dsg;
    for (int v = 0; v < 128; v++) begin
      {diff_neg, n1z, n2z, sn1, sd1, sn2, sd2} = v[6:0];
      #1;
      sa = sg(sn1) * sg(sd1);
      sbeta = sg(sn2) * sg(sd2);
      dsg = diff_neg ? -1 : 1;
      s = (dsg > 0 || n2z) ? sa : sbeta;
      if (n2z)      begin eT = s; et = s;       end
      else if (n1z) begin eT = s; et = -s;      end
      else          begin eT = s; et = s * dsg; end
      checks++;
      if (sg(s_Theta) != eT || sg(s_theta) != et) begin
        failures++;
        $display("FAIL inputs=%b: got (%b,%b)", v[6:0], s_Theta, s_theta);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
