// rot_ref.svh: real-valued reference of a fast rotation, shared by the
// testbenches. t = 2^-l (0 when l = 0), c = (1-t^2)/(1+t^2),
// s = +-2t/(1+t^2); plain form [c s; -s c], swapped form [s c; c -s].
//
// The formulas are those of the paper's fast rotations; the real-valued
// form is used only as a reference for the testbenches.
`ifndef ROT_REF_SVH
`define ROT_REF_SVH
function automatic real p2neg(input int k);
  real v = 1.0;
  for (int i = 0; i < k; i++) v = v / 2.0;
  return v;
endfunction

function automatic void rot_ref_matrix(input int l, input bit neg, input bit swap,
                                       output real r [2][2]);
  real t, c, s;
  t = (l == 0) ? 0.0 : p2neg(l);
  c = (1.0 - t * t) / (1.0 + t * t);
  s = 2.0 * t / (1.0 + t * t) * (neg ? -1.0 : 1.0);
  if (!swap) begin
    r[0][0] = c;  r[0][1] = s;  r[1][0] = -s; r[1][1] = c;
  end else begin
    r[0][0] = s;  r[0][1] = c;  r[1][0] = c;  r[1][1] = -s;
  end
endfunction
`endif
