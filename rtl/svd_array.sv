// svd_array: systolic array computing A = U * Sigma * V^T with fast rotations.
//
// An N x N matrix is split into 2x2 blocks held by an (N/2) x (N/2) grid of
// processors. The diagonal processors (dp) compute a left rotation theta and a
// right rotation Theta from their own block and send theta along their row and
// Theta along their column; every processor, diagonal or not (ndp), then
// applies R_theta^T from the left and R_Theta from the right to its block of
// Sigma, and rotates its blocks of U^T and V^T. All of this is combinational
// within one clock cycle; the registers around the grid hold Sigma, U^T and
// V^T.
//
// After each rotation step the rows and columns of the three matrices are
// exchanged in the round-robin order of the paper's schedule: with slots
// numbered 0..N-1 (slots 2k and 2k+1 belong to processor row/column k), slot 0
// keeps its index and the others move along the ring
//     1 -> 2 -> 4 -> ... -> N-2 -> N-1 -> N-3 -> ... -> 3 -> 1.
// For N = 8 this reproduces the printed pairs (1,2)(3,4)(5,6)(7,8),
// (1,4)(2,6)(3,8)(5,7), ... and returns to the natural order after N-1
// steps, i.e. at the end of every sweep.
//
// Interface: while idle, a start pulse loads a_in (two's complement, DW bits)
// into Sigma and identity into U and V. Inside, all three are IW bits wide:
// Sigma holds the input scaled by 2^(IW-DW-4) (four bits of headroom for the
// growth of the singular values, the rest fraction bits), U and V are
// fixed-point numbers with 1.0 = 2^(IW-2). sigma_out, u_out and v_out are
// these internal values. Without fraction bits in Sigma, small rotations would
// be rounded away in Sigma but not in U and V, and the factors would drift
// apart. The
// array then runs SWEEPS sweeps of N-1 steps, one per clock cycle, and pulses
// done; sigma_out, u_out and v_out hold the result until the next start.
// Latency: SWEEPS*(N-1) cycles from the start cycle to done, plus one.
//
// From the paper: the DP/NDP grid (Fig. 11), one rotation step for all
// processors per clock cycle, the processing order, 16-bit input elements and
// the 8x8 size of the architecture figure. This design's own choices: the
// parallel load/unload interface, storing U^T and V^T next to Sigma, the
// fixed-point formats (the paper only says the width "changes in the internal
// levels"; 32 bits inside is the width of its scaling circuit and of its
// accuracy study), and saturation to the storage width.
// SWEEPS = 2 matches the paper's reported throughput for this size
// (125 MHz / 8.93 M matrices/s = 14 cycles = 2 sweeps of 7 steps).
module svd_array
  import nsvd_pkg::*;
#(
  parameter int unsigned N      = 8,
  parameter int unsigned DW     = 16,   // width of the input elements
  parameter int unsigned IW     = 32,   // width of the stored Sigma, U, V
  parameter int unsigned SWEEPS = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] a_in      [N][N],
  output logic                 busy,
  output logic                 done,
  output logic signed [IW-1:0] sigma_out [N][N],
  output logic signed [IW-1:0] u_out     [N][N],
  output logic signed [IW-1:0] v_out     [N][N]
);
  localparam int unsigned P = N / 2;
  localparam int unsigned SIG_FRAC = IW - DW - 4;  // fraction bits of Sigma
  localparam logic signed [IW-1:0] ONE = IW'(64'(1) << (IW - 2));

  // slot whose content moves into slot pos after a rotation step
  function automatic int unsigned src_slot(int unsigned pos);
    if (N == 2 || pos == 0) return pos;
    else if (pos == 2)      return 1;
    else if (pos % 2 == 0)  return pos - 2;
    else if (pos == N - 1)  return N - 2;
    else                    return pos + 2;
  endfunction

  logic load, run;
  logic [$clog2(N)-1:0]        step;
  logic [$clog2(SWEEPS+1)-1:0] sweep;

  svd_ctrl #(.N(N), .SWEEPS(SWEEPS)) u_ctrl (
    .clk, .rst_n, .start, .load, .run, .busy, .done, .step, .sweep
  );

  // memory units around the grid
  logic signed [IW-1:0] sig_q [N][N];
  logic signed [IW-1:0] ut_q  [N][N];
  logic signed [IW-1:0] vt_q  [N][N];
  // processor results, before the exchange
  logic signed [IW-1:0] sig_nx [N][N];
  logic signed [IW-1:0] ut_nx  [N][N];
  logic signed [IW-1:0] vt_nx  [N][N];
  // rotations broadcast by the diagonal processors
  rot_t rt_row [P];   // theta of processor row i
  rot_t rt_col [P];   // Theta of processor column j

  for (genvar i = 0; i < P; i++) begin : g_r
    for (genvar j = 0; j < P; j++) begin : g_c
      logic signed [IW-1:0] s_i [2][2], u_i [2][2], v_i [2][2];
      logic signed [IW-1:0] s_o [2][2], u_o [2][2], v_o [2][2];
      always_comb begin
        for (int r = 0; r < 2; r++)
          for (int c = 0; c < 2; c++) begin
            s_i[r][c] = sig_q[2*i+r][2*j+c];
            u_i[r][c] = ut_q[2*i+r][2*j+c];   // rows: slot pair i
            v_i[r][c] = vt_q[2*j+r][2*i+c];   // rows: slot pair j
          end
      end
      if (i == j) begin : g_dp
        dp #(.DW(IW)) u_dp (
          .sig_in(s_i), .ut_in(u_i), .vt_in(v_i),
          .rt_theta(rt_row[i]), .rt_Theta(rt_col[j]),
          .sig_out(s_o), .ut_out(u_o), .vt_out(v_o)
        );
      end else begin : g_ndp
        ndp #(.DW(IW)) u_ndp (
          .sig_in(s_i), .ut_in(u_i), .vt_in(v_i),
          .rt_theta(rt_row[i]), .rt_Theta(rt_col[j]),
          .sig_out(s_o), .ut_out(u_o), .vt_out(v_o)
        );
      end
      always_comb begin
        for (int r = 0; r < 2; r++)
          for (int c = 0; c < 2; c++) begin
            sig_nx[2*i+r][2*j+c] = s_o[r][c];
            ut_nx[2*i+r][2*j+c]  = u_o[r][c];
            vt_nx[2*j+r][2*i+c]  = v_o[r][c];
          end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          sig_q[r][c] <= '0;
          ut_q[r][c]  <= '0;
          vt_q[r][c]  <= '0;
        end
    end else if (load) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          sig_q[r][c] <= IW'(a_in[r][c]) <<< SIG_FRAC;
          ut_q[r][c]  <= (r == c) ? ONE : '0;
          vt_q[r][c]  <= (r == c) ? ONE : '0;
        end
    end else if (run) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          sig_q[r][c] <= sig_nx[src_slot(r)][src_slot(c)];
          ut_q[r][c]  <= ut_nx[src_slot(r)][c];
          vt_q[r][c]  <= vt_nx[src_slot(r)][c];
        end
    end
  end

  always_comb begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        sigma_out[r][c] = sig_q[r][c];
        u_out[r][c]     = ut_q[c][r];
        v_out[r][c]     = vt_q[c][r];
      end
  end

  // the step counter only matters to observers of the schedule
  logic unused_cnt;
  assign unused_cnt = ^{step, sweep};
endmodule
