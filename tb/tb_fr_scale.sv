// tb_fr_scale: checks the Scale block against G/(1+2^-2l) computed in real
// arithmetic, at the 32-bit width the circuit was designed for. The
// shift-and-add expansion is exact to 32 bits for l < 16; each of the up to
// four truncating shifts loses less than one unit, and for l >= 16 the factor
// is taken as one (an error below |G|*2^-32).
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_fr_scale;
  import nsvd_pkg::*;
  `include "tb/rot_ref.svh"
  localparam int W = 32;
  logic signed [W-1:0] g, y;
  lexp_t l;
  logic lz;
  int checks = 0, failures = 0;

  fr_scale #(.W(W)) dut (.g, .l, .lz, .y);

  initial begin
    real exp_v, err;
    for (int it = 0; it < 4000; it++) begin
      g  = $urandom;
      if (it % 3 == 0) g = g >>> $urandom_range(20, 0);
      l  = $urandom_range(20, 0);
      if (it < 40) l = LW'(it % 20);
      lz = (l == 0);
      #1;
      exp_v = real'(g) / (1.0 + (lz ? 0.0 : p2neg(2 * int'(l))));
      err = real'(y) - exp_v;
      checks++;
      if (err > 5.0 || err < -5.0) begin
        failures++;
        if (failures < 10) $display("FAIL g=%0d l=%0d y=%0d exp=%f", g, l, y, exp_v);
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
