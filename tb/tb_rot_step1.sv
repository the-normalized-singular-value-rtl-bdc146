// tb_rot_step1: checks step 1 of the rotation calculation against integer
// arithmetic done here: sums and differences, sign bits, magnitudes,
// N1 = 0 / N2 = 0 flags and K = floor(log2 D) - floor(log2 N) (with
// log2 of zero taken as 0).
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_rot_step1;
  import nsvd_pkg::*;
  localparam int DW = 16;
  logic signed [DW-1:0] a, b, c, d;
  logic [DW:0] n1, n2;
  logic [DW+1:0] d1, d2;
  logic signed [LW:0] k1, k2;
  logic sn1, sd1, sn2, sd2, n1z, n2z;
  int checks = 0, failures = 0;

  rot_step1 #(.DW(DW)) dut (.*);

  function automatic int flog2(input longint x);
    int e = 0;
    while (x > 1) begin x = x / 2; e++; end
    return e;
  endfunction

  function automatic longint iabs(input longint x);
    return (x < 0) ? -x : x;
  endfunction

  task automatic chk(input longint got, input longint exp_v, input string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d (a=%0d b=%0d c=%0d d=%0d)", what, got, exp_v, a, b, c, d);
    end
  endtask

  initial begin
    longint sa, sb, sc, sd;
    for (int it = 0; it < 3000; it++) begin
      a = $urandom; b = $urandom; c = $urandom; d = $urandom;
      if (it % 5 == 1) b = c;              // N2 = 0
      if (it % 5 == 2) b = -c;             // N1 = 0
      if (it % 7 == 3) a = d;              // D1 = 0
      if (it % 9 == 4) begin a = $urandom_range(40, 0); b = $urandom_range(3, 0); end
      if (it == 0) begin a = 16'sh8000; b = 16'sh8000; c = 16'sh8000; d = 16'sh7fff; end
      #1;
      sa = a; sb = b; sc = c; sd = d;
      chk(n1, iabs(sc + sb), "N1");
      chk(n2, iabs(sc - sb), "N2");
      chk(d1, 2 * iabs(sd - sa), "D1");
      chk(d2, 2 * iabs(sd + sa), "D2");
      chk(sn1, (sc + sb) < 0, "S_N1");
      chk(sd1, (sd - sa) < 0, "S_D1");
      chk(sn2, (sc - sb) < 0, "S_N2");
      chk(sd2, (sd + sa) < 0, "S_D2");
      chk(n1z, (sc + sb) == 0, "N1=0");
      chk(n2z, (sc - sb) == 0, "N2=0");
      chk(k1, flog2(2 * iabs(sd - sa)) - flog2(iabs(sc + sb)), "K1");
      chk(k2, flog2(2 * iabs(sd + sa)) - flog2(iabs(sc - sb)), "K2");
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
