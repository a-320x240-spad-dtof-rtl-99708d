// control_logic: the measurement sequencer of the sensor.
//
// One measurement consists of num_steps phase steps; each step repeats the
// coarse operation reps times. One repetition, in reference-clock cycles:
//   RESET   rst_sys high for one clock: LFSRs, TSPCs and latches cleared
//   SETTLE  one idle clock
//   WINDOW  laser pulses in the first clock; run is high for NUM_GATES clocks
//           so the LFSRs walk through the 63 gates (the run edge is sampled
//           by the phase-shifted clock, which shifts all gates by the phase)
//   DRAIN   DRAIN_CYC clocks for late pixel pulses
//   MDONE   meas_done pulse
//   READOUT ro_start pulse, then wait for ro_done (all channels)
// After the last repetition of a step the histograms are dumped (hist_start,
// wait hist_done); then, if steps remain, step_adv tells the phase stepper to
// add k before the next step. After the last step frame_done pulses (the
// end-of-measurement flag) and the sequencer returns to idle. step_clr is
// issued at start so the phase begins at SEL0.
//
// Counter mode: the clusters count over all repetitions of a step, so they
// are cleared only in the first repetition and read out only after the last;
// no histogram dump takes place.
//
// From the paper: the order reset, laser/measure start, coarse window,
// measure done, readout start, readout, readout done, phase shift by k,
// repetitions per step and the end flag. This design's choices: every pulse
// width, the settle and drain cycles, the dump after each step and the
// counter-mode sequence.
module control_logic
  import lidar_pkg::*;
#(
  parameter int unsigned GATES     = NUM_GATES,
  parameter int unsigned DRAIN_CYC = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] num_steps,
  input  logic [15:0] reps,
  input  logic        cnt_mode,
  input  logic        ro_done,
  input  logic        hist_done,
  output logic        rst_sys,
  output logic        laser,
  output logic        run,
  output logic        meas_done,
  output logic        ro_start,
  output logic        hist_start,
  output logic        step_clr,
  output logic        step_adv,
  output logic        frame_done,
  output logic        busy,
  output logic [15:0] step_idx,
  output logic [15:0] rep_idx
);

  typedef enum logic [3:0] {
    S_IDLE, S_RESET, S_SETTLE, S_WINDOW, S_DRAIN, S_MDONE,
    S_READOUT, S_NEXT, S_HIST, S_STEP
  } state_e;

  state_e      st;
  logic [7:0]  cyc;
  logic        last_rep, last_step;

  assign last_rep  = (rep_idx  + 16'd1 >= reps);
  assign last_step = (step_idx + 16'd1 >= num_steps);
  assign busy      = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cyc <= '0; step_idx <= '0; rep_idx <= '0;
      rst_sys <= 1'b0; laser <= 1'b0; run <= 1'b0; meas_done <= 1'b0;
      ro_start <= 1'b0; hist_start <= 1'b0; step_clr <= 1'b0;
      step_adv <= 1'b0; frame_done <= 1'b0;
    end else begin
      rst_sys <= 1'b0; laser <= 1'b0; meas_done <= 1'b0; ro_start <= 1'b0;
      hist_start <= 1'b0; step_clr <= 1'b0; step_adv <= 1'b0; frame_done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          step_idx <= '0; rep_idx <= '0; step_clr <= 1'b1;
          st <= S_RESET;
        end
        S_RESET: begin
          rst_sys <= !cnt_mode || (rep_idx == '0);
          st <= S_SETTLE;
        end
        S_SETTLE: begin
          laser <= 1'b1; run <= 1'b1; cyc <= 8'd1;
          st <= S_WINDOW;
        end
        S_WINDOW: begin
          if (int'(cyc) == GATES) begin
            run <= 1'b0; cyc <= '0; st <= S_DRAIN;
          end else cyc <= cyc + 1'b1;
        end
        S_DRAIN: begin
          if (int'(cyc) + 1 >= DRAIN_CYC) begin
            meas_done <= 1'b1; st <= S_MDONE;
          end else cyc <= cyc + 1'b1;
        end
        S_MDONE: begin
          if (!cnt_mode || last_rep) begin
            ro_start <= 1'b1; st <= S_READOUT;
          end else st <= S_NEXT;
        end
        S_READOUT: if (ro_done) st <= S_NEXT;
        S_NEXT: begin
          if (!last_rep) begin
            rep_idx <= rep_idx + 1'b1; st <= S_RESET;
          end else if (!cnt_mode) begin
            hist_start <= 1'b1; st <= S_HIST;
          end else st <= S_STEP;
        end
        S_HIST: if (hist_done) st <= S_STEP;
        S_STEP: begin
          rep_idx <= '0;
          if (last_step) begin
            frame_done <= 1'b1; st <= S_IDLE;
          end else begin
            step_idx <= step_idx + 1'b1; step_adv <= 1'b1; st <= S_RESET;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The window is open exactly while the sequencer is in S_WINDOW, which it
  // leaves after GATES clocks.
  a_run_window: assert property (@(posedge clk) disable iff (!rst_n) run == (st == S_WINDOW))
    else $error("control_logic: run outside the window state");

endmodule
