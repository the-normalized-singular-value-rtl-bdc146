// rot_step2: second step of the direct fast-rotation estimate (Fig. 15).
//
// Given a numerator magnitude N, a denominator magnitude D (always even, it is
// twice an absolute value) and K = e(D) - e(N), it picks the power of two
// closest to the tangent N/D with the relaxed boundaries of the paper,
//     l_temp = K+1  if 1.5 D > 2^(K+1) N
//              K-1  if 1.5 D < 2^K N
//              K    otherwise,
// and returns l = max(l_temp + 1, 2). It also returns the flag B, set when the
// chosen power of two is smaller than the true tangent:
//     B = 1 for the K+1 case and for the K case with D < 2^K N.
// The circuit follows the figure: one barrel shifter forms 2^K N, 2^(K+1) N is
// that value shifted once more, 1.5 D is D + D/2, and three comparators feed
// two small logic circuits:
//     L-Ckt 1: B = I0 & ~I1 | I2,  O = {I2, ~I1 & ~I2}   (0, 1 or 2 added to K)
//     L-Ckt 2: sel = Kov | (K == 0) | (K == 1) & I1      (saturate l to 2)
// with I0 = D < 2^K N, I1 = 1.5 D < 2^K N, I2 = 1.5 D > 2^(K+1) N.
// The comparators are NW+2 bits wide (the paper sizes them at the input width;
// the two extra bits keep 2^(K+1) N and 1.5 D exact, this design's choice).
// Purely combinational.
module rot_step2
  import nsvd_pkg::*;
#(
  parameter int unsigned NW = 17,   // width of N
  parameter int unsigned DWD = 18   // width of D
) (
  input  logic [NW-1:0]      n,
  input  logic [DWD-1:0]     d,
  input  logic signed [LW:0] k,
  output lexp_t              l,
  output logic               b_flag
);
  localparam int unsigned CW = DWD + 2;

  logic [CW-1:0] nk, nk2, d_ext, d15;
  logic i0, i1, i2, kov, kz, k1;
  logic [1:0] o;
  lexp_t lsum;

  always_comb begin
    kov   = k[LW];
    kz    = (k == '0);
    k1    = (k == (LW+1)'(1));
    // barrel shifter: 2^K N (only meaningful for K > 0, otherwise l saturates)
    nk    = kov ? '0 : (CW'(n) << k[LW-1:0]);
    nk2   = nk << 1;
    d_ext = CW'(d);
    d15   = d_ext + (d_ext >> 1);
    i0    = d_ext < nk;
    i1    = d15 < nk;
    i2    = d15 > nk2;
    // L-Ckt 1
    b_flag = (i0 & ~i1) | i2;
    o      = {i2, ~i1 & ~i2};
    lsum   = k[LW-1:0] + LW'(o);
    // L-Ckt 2 and the saturating multiplexer
    l      = (kov | kz | (k1 & i1)) ? LW'(2) : lsum;
  end
endmodule
