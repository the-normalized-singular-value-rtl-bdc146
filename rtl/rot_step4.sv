// rot_step4: fourth step of the direct fast-rotation estimate (Fig. 17).
//
// Decides the signs of the two rotations. A multiplexer picks the sign of the
// dominant intermediate angle,
//     S = S_N1 ^ S_D1 (sign of alpha)  if l_beta - l_alpha >= 0 or N2 = 0
//         S_N2 ^ S_D2 (sign of beta)   otherwise,
// and a small logic circuit (L-Ckt 1 of the figure) forms
//     N2 = 0 : S_Theta = S,  S_theta = S
//     N1 = 0 : S_Theta = S,  S_theta = -S
//     else   : S_Theta = S,  S_theta = S * Sign(l_beta - l_alpha).
// Sign bits use the two's-complement convention: 1 means negative.
//
// Departure from the paper: its default case reads
// (S_Theta, S_theta) = (S*Sign(l_beta-l_alpha), S). With Theta = alpha+beta
// and theta = alpha-beta, and Sigma = R_theta^T A R_Theta, the dominant angle
// beta (l_beta < l_alpha) gives Theta the sign of beta and theta the opposite
// one; the printed order makes the iteration diverge in a bit-true model,
// while the order used here converges. The two outputs of the default case are
// therefore exchanged with respect to the paper. Purely combinational.
module rot_step4 (
  input  logic diff_neg,  // sign bit of l_beta - l_alpha
  input  logic n1z,
  input  logic n2z,
  input  logic sn1, sd1, sn2, sd2,
  output logic s_theta,   // 1: theta negative
  output logic s_Theta    // 1: Theta negative
);
  logic s;
  always_comb begin
    s = (~diff_neg | n2z) ? (sn1 ^ sd1) : (sn2 ^ sd2);
    if (n2z) begin
      s_Theta = s;  s_theta = s;
    end else if (n1z) begin
      s_Theta = s;  s_theta = ~s;
    end else begin
      s_Theta = s;  s_theta = s ^ diff_neg;
    end
  end
endmodule
