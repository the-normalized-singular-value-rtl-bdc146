// svd_workload_run: test harness for one configuration of the SVD array,
// used by tb_svd_workloads. It instantiates svd_array with NA x NA storage
// and SWEEPS sweeps. When go rises, it decomposes RUNS random M x M matrices,
// zero-padded to NA x NA when M < NA. For each one it checks, with real
// arithmetic done here:
//   * latency: SWEEPS*(NA-1)+1 cycles from the start cycle to done;
//   * U*Sigma*V^T reproduces the matrix within 3 %;
//   * U and V are orthogonal within 3 %;
//   * the off-diagonal norm of Sigma has not grown, and is at most
//     MAXOFF times its starting value (plus 2*NA for rounding).
// It raises fin when finished and reports its counts on checks / failures.
//
// Timing: one matrix at a time, each started with a one-cycle start pulse
// once done of the previous one has been seen. The cycle counts come from the
// paper's throughput figures; the error limits are this testbench's choice.
module svd_workload_run #(
  parameter int NA     = 8,
  parameter int M      = 8,
  parameter int SWEEPS = 2,
  parameter int RUNS   = 3,
  parameter real MAXOFF = 1.0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int DW = 16;
  localparam int IW = 32;
  localparam real ONE = 2.0 ** (IW - 2);
  localparam real SCL = 2.0 ** (IW - DW - 4);

  logic start;
  logic signed [DW-1:0] a_in [NA][NA];
  logic busy, done;
  logic signed [IW-1:0] sig [NA][NA], u [NA][NA], v [NA][NA];
  int cyc;

  svd_array #(.N(NA), .DW(DW), .IW(IW), .SWEEPS(SWEEPS)) dut (
    .clk, .rst_n, .start, .a_in, .busy, .done,
    .sigma_out(sig), .u_out(u), .v_out(v)
  );

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (N=%0d M=%0d): %s", NA, M, what);
    end
  endtask

  function automatic real offnorm_s();
    real s = 0.0;
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++)
        if (r != c) s += (real'(sig[r][c]) / SCL) ** 2;
    return $sqrt(s);
  endfunction

  function automatic real offnorm_a();
    real s = 0.0;
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++)
        if (r != c) s += real'(a_in[r][c]) ** 2;
    return $sqrt(s);
  endfunction

  task automatic verify(output real rec, output real ou, output real ov);
    real us [NA][NA];
    real na = 0.0, ne = 0.0, eu = 0.0, ev = 0.0, x, gu, gv;
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++) begin
        us[r][c] = 0.0;
        for (int k = 0; k < NA; k++) us[r][c] += (real'(u[r][k]) / ONE) * (real'(sig[k][c]) / SCL);
      end
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++) begin
        x = 0.0;
        for (int k = 0; k < NA; k++) x += us[r][k] * (real'(v[c][k]) / ONE);
        ne += (x - real'(a_in[r][c])) ** 2;
        na += real'(a_in[r][c]) ** 2;
        gu = 0.0; gv = 0.0;
        for (int k = 0; k < NA; k++) begin
          gu += real'(u[k][r]) * real'(u[k][c]) / (ONE * ONE);
          gv += real'(v[k][r]) * real'(v[k][c]) / (ONE * ONE);
        end
        eu += (gu - ((r == c) ? 1.0 : 0.0)) ** 2;
        ev += (gv - ((r == c) ? 1.0 : 0.0)) ** 2;
      end
    rec = $sqrt(ne / na);
    ou = $sqrt(eu / NA);
    ov = $sqrt(ev / NA);
  endtask

  initial begin
    int t0, lat;
    real off0, rec, ou, ov;
    fin = 1'b0; start = 1'b0; checks = 0; failures = 0; cyc = 0;
    for (int r = 0; r < NA; r++)
      for (int c = 0; c < NA; c++) a_in[r][c] = '0;
    wait (go && rst_n);
    for (int t = 0; t < RUNS; t++) begin
      for (int r = 0; r < NA; r++)
        for (int c = 0; c < NA; c++)
          a_in[r][c] = (r < M && c < M) ? DW'(int'($urandom_range(2000, 0)) - 1000) : '0;
      off0 = offnorm_a();
      @(negedge clk); start = 1'b1;
      @(posedge clk); t0 = cyc;
      @(negedge clk); start = 1'b0;
      while (!done) @(posedge clk);
      lat = cyc - t0;
      check(lat == SWEEPS * (NA - 1) + 1, $sformatf("latency %0d", lat));
      verify(rec, ou, ov);
      $display("N=%0d M=%0d sweeps=%0d: %0d cycles, off %0.1f -> %0.1f, rec %0.5f, orth %0.5f %0.5f",
               NA, M, SWEEPS, lat - 1, off0, offnorm_s(), rec, ou, ov);
      check(rec < 0.03, $sformatf("reconstruction error %f", rec));
      check(ou < 0.03 && ov < 0.03, $sformatf("orthogonality %f %f", ou, ov));
      check(offnorm_s() <= off0 + 1.0, "off-diagonal norm grew");
      check(offnorm_s() <= MAXOFF * off0 + 2.0 * NA, $sformatf("off-diagonal norm %f above limit", offnorm_s()));
      repeat (2) @(posedge clk);
    end
    fin = 1'b1;
  end
endmodule
