// givens_single: applies one fast Givens rotation to a 2x2 block (Fig. 19).
//
// With LEFT = 0 it computes Y = X * R, with LEFT = 1 it computes Y = R^T * X,
// where R is the rotation described by rt (plain [c s; -s c] or swapped
// [s c; c -s], c = (1-t^2)/(1+t^2), s = 2 S t/(1+t^2), t = 2^-l). Each of the
// four results is one pair of Multiply blocks (fr_multiply, one applying the
// unscaled cosine, one the unscaled sine), an adder and a Scale block
// (fr_scale) that applies the common factor 1/(1+t^2): 8 Multiply, 4 Add and
// 4 Scale blocks, as in the figure. The Sin? and Comp? inputs of every
// Multiply block are derived from rt by nsvd_pkg::rot_coef / comp_of.
//
// Purely combinational. The result is two bits wider than the input: the
// unscaled sum can reach 1.75 times the largest input before scaling.
//
// The block count and arrangement follow the paper. Doing the left
// multiplication by transposing the block, keeping the Scale blocks that the
// paper marks optional, and the result width are this design's choices.
module givens_single
  import nsvd_pkg::*;
#(
  parameter int unsigned W    = 16,
  parameter bit          LEFT = 1'b0
) (
  input  logic signed [W-1:0]   x [2][2],
  input  rot_t                  rt,
  output logic signed [W+1:0]   y [2][2]
);
  // xs is the operand of a right multiplication: X, or X^T for a left one.
  logic signed [W-1:0] xs [2][2];
  logic signed [W:0]   prod [2][2][2];   // [row][col][term]
  logic signed [W+1:0] sum [2][2];
  logic signed [W+1:0] ys [2][2];

  always_comb begin
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++)
        xs[i][j] = LEFT ? x[j][i] : x[i][j];
  end

  for (genvar i = 0; i < 2; i++) begin : g_row
    for (genvar j = 0; j < 2; j++) begin : g_col
      // Y[i][j] = X[i][0]*R[0][j] + X[i][1]*R[1][j]
      for (genvar t = 0; t < 2; t++) begin : g_term
        coef_t k;
        always_comb k = rot_coef(rt.neg, rt.swap, t, j);
        fr_multiply #(.W(W)) u_mul (
          .a(xs[i][t]), .l(rt.l), .lz(rt.lz),
          .sin_q(k.sin_q), .comp_q(comp_of(k, rt.lz)),
          .y(prod[i][j][t])
        );
      end
      always_comb sum[i][j] = (W+2)'(prod[i][j][0]) + (W+2)'(prod[i][j][1]);
      fr_scale #(.W(W+2)) u_scale (
        .g(sum[i][j]), .l(rt.l), .lz(rt.lz), .y(ys[i][j])
      );
    end
  end

  always_comb begin
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++)
        y[i][j] = LEFT ? ys[j][i] : ys[i][j];
  end
endmodule
