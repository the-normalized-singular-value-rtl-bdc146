// tb_rot_step2: checks the l / B computation of step 2 against the case
// statement of the algorithm evaluated in real arithmetic:
//   l_temp = K+1 (B=1) if 1.5D > 2^(K+1) N, K-1 (B=0) if 1.5D < 2^K N,
//            K (B=1) if D < 2^K N, K (B=0) otherwise;  l = max(l_temp+1, 2).
// B is only compared where l is not saturated (K >= 1).
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_rot_step2;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int NW = 17, DWD = 18;
  logic [NW-1:0] n;
  logic [DWD-1:0] d;
  logic signed [LW:0] k;
  lexp_t l;
  logic b_flag;
  int checks = 0, failures = 0;
  int cnt_up = 0, cnt_dn = 0, cnt_kb = 0, cnt_k0 = 0, cnt_sat = 0;

  rot_step2 #(.NW(NW), .DWD(DWD)) dut (.n, .d, .k, .l, .b_flag);

  function automatic int flog2(input longint x);
    int e = 0;
    while (x > 1) begin x = x / 2; e++; end
    return e;
  endfunction

  initial begin
    int kk, lt, le;
    bit be;
    real rn, rd, pk;
    for (int it = 0; it < 5000; it++) begin
      n = $urandom_range(2**NW - 1, 1) >> $urandom_range(NW - 1, 0);
      d = ($urandom_range(2**(DWD-1) - 1, 0) >> $urandom_range(DWD - 2, 0)) << 1;
      if (n == 0) n = 1;
      kk = flog2(d) - flog2(n);
      k = kk;
      #1;
      rn = n; rd = d;
      pk = (kk >= 0) ? real'(longint'(1) << kk) : p2neg(-kk);
      if (1.5 * rd > 2.0 * pk * rn)  begin lt = kk + 1; be = 1; cnt_up++; end
      else if (1.5 * rd < pk * rn)   begin lt = kk - 1; be = 0; cnt_dn++; end
      else if (rd < pk * rn)         begin lt = kk;     be = 1; cnt_kb++; end
      else                           begin lt = kk;     be = 0; cnt_k0++; end
      le = (lt + 1 > 2) ? lt + 1 : 2;
      if (le == 2) cnt_sat++;
      checks++;
      if (int'(l) != le || (kk >= 1 && b_flag != be)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d d=%0d k=%0d: l=%0d B=%0d expected l=%0d B=%0d", n, d, kk, l, b_flag, le, be);
      end
    end
    $display("cases: K+1 %0d, K-1 %0d, K/B=1 %0d, K/B=0 %0d, saturated %0d", cnt_up, cnt_dn, cnt_kb, cnt_k0, cnt_sat);
    checks++;
    if (cnt_up == 0 || cnt_dn == 0 || cnt_kb == 0 || cnt_k0 == 0 || cnt_sat == 0) failures++;
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
