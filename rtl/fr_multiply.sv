// fr_multiply: the "Multiply" block of a fast rotation (Fig. 21).
//
// Multiplies a two's-complement value A by the unscaled coefficient of a fast
// rotation with tangent t = 2^-l, without a multiplier:
//     cosine (Sin? = 0): A*(1 - t^2) = A - (A >>> 2l)
//     sine   (Sin? = 1): A*(2t)      = A >>> (l-1), negated when Comp? = 1
// A barrel shifter shifts right by 2l or l-1, a ones-complement stage inverts
// when Comp? = 1, and the adder adds either A (cosine) or 0 (sine) with Comp?
// as carry-in, turning the ones-complement into a two's-complement negation.
// With l = 0 (t = 0) the result is A for a cosine and, with Comp? = 1,
// A - A = 0 for a sine, as the text describes. For the cosine with l = 0 the
// shifted operand is forced to zero so that the adder adds A and zero (the
// text's "xi = 1" case); the figure does not print how that zero is made.
// Purely combinational; the output is one bit wider than the input so that
// the negation of the most negative input cannot overflow.
//
// The structure (barrel shifter, complement, adder with carry-in, A/0
// multiplexer) follows the paper's Multiply circuit; the shift amounts are
// derived from the coefficient formulas, and the extra output bit is this
// design's choice.
module fr_multiply
  import nsvd_pkg::*;
#(
  parameter int unsigned W = 18
) (
  input  logic signed [W-1:0] a,
  input  lexp_t               l,
  input  logic                lz,      // l == 0
  input  logic                sin_q,   // Sin?: 1 = sine, 0 = cosine
  input  logic                comp_q,  // Comp?: negate the shifted operand
  output logic signed [W:0]   y
);
  logic signed [W:0] ax, sh, shc, op2;
  logic [LW:0] amt;
  logic sin_nz;

  always_comb begin
    sin_nz = ~lz & sin_q;
    amt    = sin_nz ? {1'b0, l - LW'(1)} : {l, 1'b0};
    ax     = (W+1)'(a);
    sh     = ax >>> amt;
    if (lz & ~sin_q) sh = '0;
    shc    = comp_q ? ~sh : sh;
    op2    = sin_nz ? '0 : ax;
    y      = op2 + shc + (W+1)'(comp_q);
  end
endmodule
