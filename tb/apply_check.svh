// apply_check.svh: reference check of one processor update, shared by the
// apply_rot, ndp and dp testbenches. Expects in scope: DW, sig_in/ut_in/vt_in,
// sig_out/ut_out/vt_out, rt_theta, rt_Theta, checks, failures, saturated,
// and rot_ref_matrix from rot_ref.svh.
//
// The reference is plain real arithmetic, independent of the design; the
// tolerances (8 LSB at 16 bits, 16 LSB at wider widths) are this
// testbench's choice.
function automatic rot_t rnd_rot();
  rot_t r;
  r.l = $urandom_range(20, 0);
  r.lz = (r.l == 0);
  r.neg = $urandom_range(1, 0);
  r.swap = $urandom_range(1, 0);
  return r;
endfunction

function automatic real clampr(input real v);
  real mx = 2.0 ** (DW - 1);
  if (v > mx - 1.0) begin saturated++; return mx - 1.0; end
  if (v < -mx) begin saturated++; return -mx; end
  return v;
endfunction

function automatic void cmp(input real got, input real ex, input string what, input real tol);
  checks++;
  if (got - ex > tol || ex - got > tol) begin
    failures++;
    if (failures < 10) $display("FAIL %s: %f vs %f (l=%0d/%0d)", what, got, ex, rt_theta.l, rt_Theta.l);
  end
endfunction

task automatic check_apply();
  real a [2][2], b [2][2], t [2][2];
  real ex, tol;
  tol = (DW > 16) ? 16.0 : 8.0;
  rot_ref_matrix(int'(rt_theta.l), rt_theta.neg, rt_theta.swap, a);
  rot_ref_matrix(int'(rt_Theta.l), rt_Theta.neg, rt_Theta.swap, b);
  for (int i = 0; i < 2; i++)
    for (int j = 0; j < 2; j++)
      t[i][j] = a[0][i] * sig_in[0][j] + a[1][i] * sig_in[1][j];
  for (int i = 0; i < 2; i++)
    for (int j = 0; j < 2; j++) begin
      ex = clampr(t[i][0] * b[0][j] + t[i][1] * b[1][j]);
      cmp(sig_out[i][j], ex, "Sigma", tol);
      ex = clampr(a[0][i] * ut_in[0][j] + a[1][i] * ut_in[1][j]);
      cmp(ut_out[i][j], ex, "U^T", tol);
      ex = clampr(b[0][i] * vt_in[0][j] + b[1][i] * vt_in[1][j]);
      cmp(vt_out[i][j], ex, "V^T", tol);
    end
endtask
