// rot_calc: rotation-calculation circuit of a diagonal processor (Fig. 13).
//
// Chains steps 1 to 4 of the direct estimate: step 1 forms N1, N2, D1, D2,
// K1, K2 and the sign bits from the 2x2 block [a b; c d]; two copies of step 2
// turn (N1, D1, K1) into l_alpha, B and (N2, D2, K2) into l_beta, b; step 3
// combines them into l_theta, l_Theta; step 4 gives the signs. The results
// are packed into two rot_t words, the signals the diagonal processor sends
// along its row (theta) and its column (Theta): exponent, sign, "l = 0" and
// the matrix form.
//
// The form bit follows the hardware description of the paper (Sin? = S_N1,
// S_N1 transmitted along rows and columns): the plain rotation [c s; -s c] is
// used when S_N1 < 0 (c+b < 0) and the column-swapped form [s c; c -s]
// otherwise. Step 6 of the paper's Algorithm 3 selects the form with S_D1
// instead; that choice orders a lone 2x2 block (d1 >= d2) but, inside the
// array, it keeps exchanging indices within a processor in a way that breaks
// the round-robin order, and the off-diagonal norm stops decreasing. With
// S_N1 the array converges.
// Purely combinational.
module rot_calc
  import nsvd_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] a, b, c, d,
  output rot_t                 rot_theta,  // left rotation, sent along the row
  output rot_t                 rot_Theta   // right rotation, sent along the column
);
  logic [DW:0]   n1, n2;
  logic [DW+1:0] d1, d2;
  logic signed [LW:0] k1, k2;
  logic sn1, sd1, sn2, sd2, n1z, n2z;
  lexp_t l_alpha, l_beta, l_theta, l_Theta;
  logic b_big, b_small, diff_neg, s_theta, s_Theta;

  rot_step1 #(.DW(DW)) u_step1 (
    .a, .b, .c, .d, .n1, .n2, .d1, .d2, .k1, .k2,
    .sn1, .sd1, .sn2, .sd2, .n1z, .n2z
  );

  rot_step2 #(.NW(DW+1), .DWD(DW+2)) u_step2_alpha (
    .n(n1), .d(d1), .k(k1), .l(l_alpha), .b_flag(b_big)
  );

  // Algorithm 3 compares D2 against N1 here; that is a misprint, N2 is used.
  rot_step2 #(.NW(DW+1), .DWD(DW+2)) u_step2_beta (
    .n(n2), .d(d2), .k(k2), .l(l_beta), .b_flag(b_small)
  );

  rot_step3 u_step3 (
    .l_alpha, .l_beta, .n1z, .n2z,
    .bb(b_big & b_small),
    .sgn_x((sn2 ^ sd2) ^ (sn1 ^ sd1)),
    .l_theta, .l_Theta, .diff_neg
  );

  rot_step4 u_step4 (
    .diff_neg, .n1z, .n2z, .sn1, .sd1, .sn2, .sd2, .s_theta, .s_Theta
  );

  always_comb begin
    rot_theta.l    = l_theta;
    rot_theta.neg  = s_theta;
    rot_theta.lz   = (l_theta == '0);
    rot_theta.swap = ~sn1;
    rot_Theta.l    = l_Theta;
    rot_Theta.neg  = s_Theta;
    rot_Theta.lz   = (l_Theta == '0);
    rot_Theta.swap = ~sn1;
  end
endmodule
