// apply_rot: circuit for applying the rotations of one processor (Fig. 18).
//
// Every processor of the array holds three 2x2 blocks: a block of Sigma (the
// matrix being diagonalised, initially A), a block of U^T and a block of V^T
// (initially identity blocks). One rotation step updates them as
//     Sigma <- R_theta^T * Sigma * R_Theta   (double rotation, givens_double)
//     U^T   <- R_theta^T * U^T               (single rotation)
//     V^T   <- R_Theta^T * V^T               (single rotation)
// which keeps A = U * Sigma * V^T invariant. theta arrives along the
// processor's row and Theta along its column. Storing the transposes of U and
// V lets all three updates combine rows, so that the row/column exchange of
// the array moves them together with Sigma.
//
// Purely combinational. Results are saturated back to the DW-bit storage
// width (the saturation is this design's choice; the paper does not say how
// the storage width is kept).
module apply_rot
  import nsvd_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] sig_in [2][2],
  input  logic signed [DW-1:0] ut_in  [2][2],
  input  logic signed [DW-1:0] vt_in  [2][2],
  input  rot_t                 rt_theta,
  input  rot_t                 rt_Theta,
  output logic signed [DW-1:0] sig_out [2][2],
  output logic signed [DW-1:0] ut_out  [2][2],
  output logic signed [DW-1:0] vt_out  [2][2]
);
  localparam logic signed [DW+3:0] MAXV = (DW+4)'((2**(DW-1)) - 1);
  localparam logic signed [DW+3:0] MINV = -(DW+4)'(2**(DW-1));

  logic signed [DW+3:0] sig_w [2][2];
  logic signed [DW+1:0] ut_w  [2][2];
  logic signed [DW+1:0] vt_w  [2][2];

  givens_double #(.W(DW)) u_sigma (
    .x(sig_in), .rt_theta(rt_theta), .rt_Theta(rt_Theta), .y(sig_w)
  );

  givens_single #(.W(DW), .LEFT(1'b1)) u_ut (
    .x(ut_in), .rt(rt_theta), .y(ut_w)
  );

  givens_single #(.W(DW), .LEFT(1'b1)) u_vt (
    .x(vt_in), .rt(rt_Theta), .y(vt_w)
  );

  function automatic logic signed [DW-1:0] sat(logic signed [DW+3:0] v);
    if (v > MAXV)      return MAXV[DW-1:0];
    else if (v < MINV) return MINV[DW-1:0];
    else               return v[DW-1:0];
  endfunction

  always_comb begin
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        sig_out[i][j] = sat(sig_w[i][j]);
        ut_out[i][j]  = sat((DW+4)'(ut_w[i][j]));
        vt_out[i][j]  = sat((DW+4)'(vt_w[i][j]));
      end
  end
endmodule
