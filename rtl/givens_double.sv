// givens_double: applies both fast rotations to a 2x2 block (Fig. 20).
//
// Computes Y = R_theta^T * X * R_Theta: a first layer of four Multiply pairs,
// adders and Scale blocks applies the left rotation (theta, received along the
// processor row), a second identical layer applies the right rotation (Theta,
// received along the processor column). This is twice the single-rotation
// circuit, as in the paper: 16 Multiply, 8 Add and 8 Scale blocks.
//
// Purely combinational. The intermediate result keeps two extra bits, the
// output four; the caller saturates back to the storage width.
module givens_double
  import nsvd_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  logic signed [W-1:0]   x [2][2],
  input  rot_t                  rt_theta,
  input  rot_t                  rt_Theta,
  output logic signed [W+3:0]   y [2][2]
);
  logic signed [W+1:0] m [2][2];

  givens_single #(.W(W), .LEFT(1'b1)) u_left (
    .x(x), .rt(rt_theta), .y(m)
  );

  givens_single #(.W(W+2), .LEFT(1'b0)) u_right (
    .x(m), .rt(rt_Theta), .y(y)
  );
endmodule
