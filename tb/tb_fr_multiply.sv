// tb_fr_multiply: checks the shift-and-add Multiply block against real
// arithmetic: A*(1-2^-2l) for a cosine, +-A*2^(1-l) for a sine, A and 0 for
// l = 0. Results may differ from the real value by the truncation of one
// arithmetic right shift (less than one unit).
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_fr_multiply;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int W = 18;
  logic signed [W-1:0] a;
  lexp_t l;
  logic lz, sin_q, comp_q;
  logic signed [W:0] y;
  int checks = 0, failures = 0;

  fr_multiply #(.W(W)) dut (.a, .l, .lz, .sin_q, .comp_q, .y);

  initial begin
    real exp_v, tt;
    bit neg;
    for (int it = 0; it < 4000; it++) begin
      a     = $urandom;
      if (it < 4) a = (it[0]) ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
      l     = $urandom_range(20, 0);
      lz    = (l == 0);
      sin_q = $urandom_range(1, 0);
      neg   = $urandom_range(1, 0);
      comp_q = comp_of('{sin_q: sin_q, neg: neg}, lz);
      #1;
      tt = lz ? 0.0 : p2neg(int'(l));
      exp_v = sin_q ? real'(a) * 2.0 * tt * (neg ? -1.0 : 1.0) : real'(a) * (1.0 - tt * tt);
      checks++;
      if ((real'(y) - exp_v) > 1.0 || (real'(y) - exp_v) < -1.0) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d l=%0d sin=%0d neg=%0d y=%0d exp=%f", a, l, sin_q, neg, y, exp_v);
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
