// ising_ctrl: run controller of the Ising array.
//
// A solve is: configure weights, routing and spin enables, write the initial
// spin states, then let all spins update in parallel for a number of discrete
// time steps while the annealing noise is lowered. This controller does the
// last part. start (while idle) begins a run of n_steps updates, one per clock
// cycle: step_en is 1 for exactly n_steps consecutive cycles. The noise
// amplitude starts at amp0 and drops by 1 after every amp_period updates
// (amp_period = 0 keeps it constant), never below 0. done pulses for one
// cycle after the last update; step_count is the number of updates made in
// the current or last run.
//
// Timing: step_en and noise_amp are registered; the first update is the cycle
// after start. n_steps = 0 ends the run at once (done, no update).
//
// From the architecture: initialise, then update at discrete time steps with
// annealing. This design's choice: one update per cycle and the linear,
// stepwise amplitude schedule.
module ising_ctrl
  import fpia_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       n_steps,
  input  logic [AMP_W-1:0]  amp0,
  input  logic [15:0]       amp_period,
  output logic              busy,
  output logic              done,
  output logic              step_en,
  output logic [AMP_W-1:0]  noise_amp,
  output logic [15:0]       step_count
);

  typedef enum logic [0:0] { S_IDLE, S_RUN } state_e;
  state_e state;

  logic [15:0] left_cnt;    // updates still to issue after this one
  logic [15:0] period_cnt;
  logic [15:0] period;

  assign busy = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      left_cnt   <= '0;
      period_cnt <= '0;
      period     <= '0;
      step_en    <= 1'b0;
      noise_amp  <= '0;
      step_count <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          step_en <= 1'b0;
          if (start) begin
            step_count <= '0;
            noise_amp  <= amp0;
            period     <= amp_period;
            period_cnt <= '0;
            if (n_steps == 0) begin
              done <= 1'b1;
            end else begin
              state    <= S_RUN;
              step_en  <= 1'b1;
              left_cnt <= n_steps - 16'd1;
            end
          end
        end
        S_RUN: begin
          // step_en is high this cycle: one update is being made.
          step_count <= step_count + 16'd1;
          if (period != 0) begin
            if (period_cnt == period - 16'd1) begin
              period_cnt <= '0;
              if (noise_amp != 0) noise_amp <= noise_amp - 1'b1;
            end else begin
              period_cnt <= period_cnt + 16'd1;
            end
          end
          if (left_cnt == 0) begin
            state   <= S_IDLE;
            step_en <= 1'b0;
            done    <= 1'b1;
          end else begin
            left_cnt <= left_cnt - 16'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // step_en is asserted exactly while running.
  a_step_busy: assert property (@(posedge clk) disable iff (!rst_n) step_en == busy);

endmodule
