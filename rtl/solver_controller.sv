// solver_controller -- run control of the parallel memcomputing solver.
//
// What it does: a `start` strobe loads the initial state into every
// variable and clause unit (load strobe) and begins a run.  During the run it
// counts STEP_CYCLES clocks per integration step; at the end of each step
// period it looks at all_sat (every clause satisfied by the signs of the
// current V).  If the formula is satisfied the run ends: `done` rises,
// `steps` holds the number of integration steps taken and `tx_start` pulses
// once to send the solution.  Otherwise it issues a one-cycle `step` strobe
// that advances every variable and memory by one Euler step at once.
//
// Timing: the first check comes STEP_CYCLES clocks after the load, so a run
// that needs k steps ends (k+1)*STEP_CYCLES clocks after `start`, and steps
// are exactly STEP_CYCLES clocks apart.  The solver datapath between the
// state registers is combinational and may use all STEP_CYCLES clocks
// (a multicycle path).  status_pin is low while a run is in progress and
// high otherwise, as the published board's timing output was.
//
// Follows the published design: one step of all ODEs in parallel per
// 96 ns, a stop on the solution, the low-during-calculation pin, the
// transfer of the solution.  Own choices: the clock frequency (STEP_CYCLES
// = 12 gives 96 ns at 125 MHz), checking the solution once per step before
// the update, and the restart behaviour (a new `start` after `done`).
module solver_controller #(
  parameter int STEP_CYCLES = 12,      // clocks per integration step (>= 1)
  parameter int STEPW       = 32       // width of the step counter
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             all_sat,
  output logic             load,
  output logic             step,
  output logic             busy,
  output logic             done,
  output logic             tx_start,
  output logic             status_pin,
  output logic [STEPW-1:0] steps
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  localparam int CW = (STEP_CYCLES > 1) ? $clog2(STEP_CYCLES) : 1;

  state_t          state;
  logic [CW-1:0]   cnt;
  logic            period_end;

  assign period_end = (cnt == CW'(STEP_CYCLES - 1));
  assign load       = (state != S_RUN) && start;
  assign step       = (state == S_RUN) && period_end && !all_sat;
  assign busy       = (state == S_RUN);
  assign done       = (state == S_DONE);
  assign status_pin = (state != S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      steps    <= '0;
      tx_start <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_RUN;
          cnt   <= '0;
          steps <= '0;
        end
        S_RUN: begin
          cnt <= period_end ? '0 : cnt + 1'b1;
          if (period_end) begin
            if (all_sat) begin
              state    <= S_DONE;
              tx_start <= 1'b1;
            end else begin
              steps <= steps + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A step and a load never coincide; steps only happen inside a run.
  a_step_in_run : assert property (@(posedge clk) disable iff (!rst_n) step |-> busy && !load);

endmodule
