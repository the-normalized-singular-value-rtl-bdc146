// dp: diagonal processor of the systolic array.
//
// Calculates the two fast rotations from its own 2x2 block of Sigma
// (rot_calc), transmits them, theta along its row and Theta along its column,
// and applies them to its own blocks (apply_rot). Both parts are
// combinational; the block registers live in the array around the
// processors. Following the paper, the DP's own blocks are rotated with the
// values it has just computed, in the same clock cycle as the NDPs.
module dp
  import nsvd_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] sig_in [2][2],
  input  logic signed [DW-1:0] ut_in  [2][2],
  input  logic signed [DW-1:0] vt_in  [2][2],
  output rot_t                 rt_theta,   // sent along the row
  output rot_t                 rt_Theta,   // sent along the column
  output logic signed [DW-1:0] sig_out [2][2],
  output logic signed [DW-1:0] ut_out  [2][2],
  output logic signed [DW-1:0] vt_out  [2][2]
);
  rot_calc #(.DW(DW)) u_calc (
    .a(sig_in[0][0]), .b(sig_in[0][1]), .c(sig_in[1][0]), .d(sig_in[1][1]),
    .rot_theta(rt_theta), .rot_Theta(rt_Theta)
  );

  apply_rot #(.DW(DW)) u_apply (
    .sig_in, .ut_in, .vt_in, .rt_theta, .rt_Theta,
    .sig_out, .ut_out, .vt_out
  );
endmodule
