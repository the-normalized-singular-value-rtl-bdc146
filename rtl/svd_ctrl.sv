// svd_ctrl: sequencer of the systolic SVD array.
//
// A decomposition starts with a one-cycle load (start accepted while idle),
// then runs SWEEPS sweeps of N-1 rotation steps, one step per clock cycle: in
// each step every processor applies its rotations and the array exchanges
// rows and columns in the round-robin order of the paper's schedule, so that
// after N-1 steps every pair of indices has met once and the original order
// is back. done is a one-cycle pulse after the last step; busy is high from
// the start cycle until done. The step and sweep counters are outputs so that
// the surrounding array and its test can follow the schedule.
//
// The paper gives the processing order (its Fig. 12) and, through its
// throughput figures, one step per clock cycle; the start/busy/done handshake
// and the counters are this design's choice.
module svd_ctrl #(
  parameter int unsigned N      = 8,   // matrix size (even)
  parameter int unsigned SWEEPS = 2    // sweeps per decomposition
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic load,     // capture the input matrix this cycle
  output logic run,      // apply one rotation step this cycle
  output logic busy,
  output logic done,
  output logic [$clog2(N)-1:0]        step,
  output logic [$clog2(SWEEPS+1)-1:0] sweep
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  localparam int unsigned SW_W = $clog2(SWEEPS+1);
  localparam int unsigned ST_W = $clog2(N);

  logic last_step;

  always_comb begin
    last_step = (step == ST_W'(N-2)) && (sweep == SW_W'(SWEEPS-1));
    load = (state == S_IDLE) && start;
    run  = (state == S_RUN);
    busy = (state != S_IDLE) || start;
    done = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      sweep <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          step  <= '0;
          sweep <= '0;
        end
        S_RUN: begin
          if (last_step) begin
            state <= S_DONE;
          end
          if (step == ST_W'(N-2)) begin
            step  <= '0;
            sweep <= sweep + 1'b1;
          end else begin
            step <= step + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Loading and rotating never overlap, and a run always ends in done. The
  // properties do not name rst_n (a reset puts the sequencer in S_IDLE,
  // where both hold), so that the asynchronous reset is not also sampled
  // synchronously; a reset applied during the last step would trip the
  // second one.
  assert property (@(posedge clk) !(load && run));
  assert property (@(posedge clk) run && last_step |=> done);
endmodule
