// tb_svd_array: end-to-end test of the systolic fast-rotation SVD array.
//
// Runs the array at its default size (8x8, 16-bit, 2 sweeps) on a set of
// matrices (random ones, a diagonal one, a symmetric one and one with
// antisymmetric 2x2 diagonal blocks) and checks, with real arithmetic done
// here and not in the design:
//   * latency: done arrives SWEEPS*(N-1)+1 cycles after the start cycle;
//   * reconstruction: ||U*Sigma*V^T - A|| / ||A|| below 3 %;
//   * orthogonality: ||U^T U - I|| and ||V^T V - I|| below 3 %;
//   * progress: the off-diagonal norm of Sigma does not grow.
// The array is used with all parameters at their defaults; the convergence
// over more sweeps is checked in tb_svd_workloads.
// It also counts, through the rotation words broadcast by the diagonal
// processors and the case signals of their step-3 circuits, how often each
// mechanism of the design occurs (plain and swapped rotation forms, "no
// rotation" l = 0, N1 = 0, N2 = 0, the l_beta-l_alpha = 0 / +-1 / other
// cases, the end-of-sweep wrap of the exchange network), and counts a
// failure for any that never occurred.
//
// The reference values are computed here, independently of the design;
// the rules checked are the paper's (with the departures listed in the
// design's documentation), and the tolerances are this testbench's choice.
module tb_svd_array;
  import nsvd_pkg::*;
  localparam int N = 8;
  localparam int DW = 16;
  localparam int SWEEPS = 2;
  localparam int P = N / 2;
  localparam int IW = 32;
  localparam real ONE = 2.0 ** (IW - 2);       // U, V: 1.0
  localparam real SCL = 2.0 ** (IW - DW - 4);  // Sigma: input scale

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic signed [DW-1:0] a_in [N][N];
  logic busy, done;
  logic signed [IW-1:0] sig [N][N], u [N][N], v [N][N];

  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  svd_array dut (
    .clk, .rst_n, .start, .a_in, .busy, .done,
    .sigma_out(sig), .u_out(u), .v_out(v)
  );


  // mechanism counters
  int n_plain = 0, n_swap = 0, n_lz = 0, n_n1z = 0, n_n2z = 0;
  int n_eq = 0, n_pm1 = 0, n_other = 0, n_wrap = 0;

  for (genvar k = 0; k < P; k++) begin : g_mon
    always @(posedge clk) if (dut.run) begin
      if (dut.rt_row[k].swap) n_swap++; else n_plain++;
      if (dut.rt_row[k].lz || dut.rt_col[k].lz) n_lz++;
      if (dut.g_r[k].g_c[k].g_dp.u_dp.u_calc.n1z) n_n1z++;
      if (dut.g_r[k].g_c[k].g_dp.u_dp.u_calc.n2z) n_n2z++;
      if (dut.g_r[k].g_c[k].g_dp.u_dp.u_calc.u_step3.is0) n_eq++;
      else if (dut.g_r[k].g_c[k].g_dp.u_dp.u_calc.u_step3.isp1 ||
               dut.g_r[k].g_c[k].g_dp.u_dp.u_calc.u_step3.ism1) n_pm1++;
      else n_other++;
    end
  end
  always @(posedge clk) if (dut.run && dut.step == $bits(dut.step)'(N-2)) n_wrap++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic real offnorm(input logic signed [IW-1:0] m [N][N], input real scl);
    real s = 0.0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (r != c) s += (real'(m[r][c]) / scl) ** 2;
    return $sqrt(s);
  endfunction

  function automatic real offnorm_a();
    real s = 0.0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (r != c) s += real'(a_in[r][c]) ** 2;
    return $sqrt(s);
  endfunction

  // relative reconstruction error and orthogonality errors
  task automatic verify(input logic signed [IW-1:0] s_m [N][N],
                        input logic signed [IW-1:0] u_m [N][N],
                        input logic signed [IW-1:0] v_m [N][N],
                        output real rec, output real ou, output real ov);
    real us [N][N];
    real na = 0.0, ne = 0.0, eu = 0.0, ev = 0.0, x, gu, gv;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        us[r][c] = 0.0;
        for (int k = 0; k < N; k++) us[r][c] += (real'(u_m[r][k]) / ONE) * (real'(s_m[k][c]) / SCL);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        x = 0.0;
        for (int k = 0; k < N; k++) x += us[r][k] * (real'(v_m[c][k]) / ONE);
        ne += (x - real'(a_in[r][c])) ** 2;
        na += real'(a_in[r][c]) ** 2;
        gu = 0.0; gv = 0.0;
        for (int k = 0; k < N; k++) begin
          gu += real'(u_m[k][r]) * real'(u_m[k][c]) / (ONE * ONE);
          gv += real'(v_m[k][r]) * real'(v_m[k][c]) / (ONE * ONE);
        end
        eu += (gu - ((r == c) ? 1.0 : 0.0)) ** 2;
        ev += (gv - ((r == c) ? 1.0 : 0.0)) ** 2;
      end
    rec = $sqrt(ne / na);
    ou = $sqrt(eu / N);
    ov = $sqrt(ev / N);
  endtask

  task automatic run_one(input int kind, input int amp);
    int t0, lat;
    real off0, rec, ou, ov;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        int val;
        val = int'($urandom_range(2 * amp, 0)) - amp;
        unique case (kind)
          0: a_in[r][c] = DW'(val);                                  // random
          1: a_in[r][c] = (r == c) ? DW'(val) : '0;                  // diagonal
          2: a_in[r][c] = (r <= c) ? DW'(val) : a_in[c][r];          // symmetric
          default: a_in[r][c] = (r / 2 == c / 2 && r != c) ?
                                  ((r < c) ? DW'(val) : -a_in[c][r]) : DW'(val);
        endcase
      end
    off0 = offnorm_a();
    @(negedge clk); start = 1'b1;
    @(posedge clk); t0 = cyc;
    @(negedge clk); start = 1'b0;
    while (!done) @(posedge clk);
    lat = cyc - t0;
    check(lat == SWEEPS * (N - 1) + 1, $sformatf("latency %0d, expected %0d", lat, SWEEPS * (N - 1) + 1));
    verify(sig, u, v, rec, ou, ov);
    $display("kind %0d: off %0.1f -> %0.1f, rec %0.4f, orth %0.4f %0.4f", kind, off0, offnorm(sig, SCL), rec, ou, ov);
    check(rec < 0.03, $sformatf("reconstruction error %f", rec));
    check(ou < 0.03 && ov < 0.03, $sformatf("orthogonality %f %f", ou, ov));
    check(offnorm(sig, SCL) <= off0 + 1.0, "off-diagonal norm grew");
    repeat (2) @(posedge clk);
  endtask

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) a_in[r][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) run_one(0, 1000);
    run_one(0, 100);
    run_one(1, 1000);
    run_one(2, 1000);
    run_one(3, 1000);
    $display("mechanisms: plain %0d swap %0d l=0 %0d N1=0 %0d N2=0 %0d diff0 %0d diff+-1 %0d other %0d wrap %0d",
             n_plain, n_swap, n_lz, n_n1z, n_n2z, n_eq, n_pm1, n_other, n_wrap);
    check(n_plain > 0, "plain rotation form never used");
    check(n_swap > 0, "swapped rotation form never used");
    check(n_lz > 0, "no-rotation (l = 0) never occurred");
    check(n_n1z > 0, "N1 = 0 never occurred");
    check(n_n2z > 0, "N2 = 0 never occurred");
    check(n_eq > 0, "l_beta = l_alpha never occurred");
    check(n_pm1 > 0, "l_beta - l_alpha = +-1 never occurred");
    check(n_other > 0, "other step-3 case never occurred");
    check(n_wrap > 0, "sweep wrap never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
