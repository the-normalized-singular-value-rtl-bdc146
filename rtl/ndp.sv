// ndp: non-diagonal processor of the systolic array.
//
// Receives theta from the diagonal processor of its row and Theta from the
// diagonal processor of its column and applies them to its 2x2 blocks of
// Sigma, U^T and V^T through the fully combinational rotation circuit
// (apply_rot). The block registers live in the array around the processors.
//
// Ports: the stored blocks in, the two rotations in, the updated blocks out;
// purely combinational. The paper gives the processor's role (receive and
// apply); building it from the rotation-application circuit alone is the
// simplest form of that role and this design's choice.
module ndp
  import nsvd_pkg::*;
#(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] sig_in [2][2],
  input  logic signed [DW-1:0] ut_in  [2][2],
  input  logic signed [DW-1:0] vt_in  [2][2],
  input  rot_t                 rt_theta,   // from the DP of this row
  input  rot_t                 rt_Theta,   // from the DP of this column
  output logic signed [DW-1:0] sig_out [2][2],
  output logic signed [DW-1:0] ut_out  [2][2],
  output logic signed [DW-1:0] vt_out  [2][2]
);
  apply_rot #(.DW(DW)) u_apply (
    .sig_in, .ut_in, .vt_in, .rt_theta, .rt_Theta,
    .sig_out, .ut_out, .vt_out
  );
endmodule
