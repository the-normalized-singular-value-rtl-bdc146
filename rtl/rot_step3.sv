// rot_step3: third step of the direct fast-rotation estimate (Fig. 16).
//
// Combines the exponents of the two intermediate angles, l_alpha and l_beta,
// into the exponents of the two rotations that are applied, l_Theta (right
// side, Theta = alpha + beta) and l_theta (left side, theta = alpha - beta):
//     N1 = N2 = 0        : (0, 0)   no rotation, the block is diagonal
//     N2 = 0             : (l_alpha, l_alpha)
//     N1 = 0             : (l_beta,  l_beta)
//     l_beta-l_alpha = -1: (l_beta - (B&b), l_alpha)
//     l_beta-l_alpha = +1: (l_alpha - (B&b), l_beta)
//     l_beta-l_alpha =  0: (l_beta - 1, 0)          (0 means no rotation)
//     otherwise          : (min, min)
// and the two are exchanged when alpha and beta have opposite signs, i.e. when
// (S_N2 ^ S_D2) ^ (S_N1 ^ S_D1) = 1. The sign bit of l_beta - l_alpha goes on
// to step 4. The choices are those of the paper's Algorithm 3 / Table 1
// column "chosen", except the first line: the paper lists no case for a
// block that is already diagonal, and applying a tiny rotation there would
// only turn U and V while leaving Sigma unchanged after rounding; as in the
// paper's symmetric algorithm ((c,s) = (1,0) if N = 0) no rotation is applied.
// The subtractor, the =0/=+1/=-1 detectors and the
// min-multiplexer are those of the figure. The two logic circuits of the
// figure are written here as the case statement they implement (the printed
// wiring of their inputs is not legible enough to copy gate for gate).
// Purely combinational.
module rot_step3
  import nsvd_pkg::*;
(
  input  lexp_t l_alpha,
  input  lexp_t l_beta,
  input  logic  n1z,
  input  logic  n2z,
  input  logic  bb,        // B & b
  input  logic  sgn_x,     // (S_N2 ^ S_D2) ^ (S_N1 ^ S_D1)
  output lexp_t l_theta,
  output lexp_t l_Theta,
  output logic  diff_neg   // sign bit of l_beta - l_alpha
);
  logic signed [LW:0] diff;
  logic is0, isp1, ism1;
  lexp_t lmin, tT, tt;

  always_comb begin
    diff     = signed'({1'b0, l_beta}) - signed'({1'b0, l_alpha});
    diff_neg = diff[LW];
    is0      = (diff == '0);
    isp1     = (diff == (LW+1)'(1));
    ism1     = (diff == '1);
    lmin     = diff_neg ? l_beta : l_alpha;
    if (n1z && n2z) begin
      tT = '0;                     tt = '0;
    end else if (n2z) begin
      tT = l_alpha;                tt = l_alpha;
    end else if (n1z) begin
      tT = l_beta;                 tt = l_beta;
    end else if (ism1) begin
      tT = l_beta - LW'(bb);       tt = l_alpha;
    end else if (isp1) begin
      tT = l_alpha - LW'(bb);      tt = l_beta;
    end else if (is0) begin
      tT = l_beta - LW'(1);        tt = '0;
    end else begin
      tT = lmin;                   tt = lmin;
    end
    // final multiplexer: exchange when alpha and beta differ in sign
    if (sgn_x) begin
      l_Theta = tt;  l_theta = tT;
    end else begin
      l_Theta = tT;  l_theta = tt;
    end
  end
endmodule
