// traffic_fsm: the state register and next-state logic of the junction
// controller (the output logic is in light_encoder).
//
// The controller serves one selected state at a time, held in state.mode:
//   - traditional cycle: eight phases, sequentially encoded 0..7, stepping
//     green (GREEN_S) and yellow (YELLOW_S) in turn, road 1 to road 4;
//   - emergency of road k: that road green in all directions, held for as
//     long as it stays selected;
//   - Safe State: all roads yellow, held for as long as it stays selected.
// Whenever the 3-bit input em differs from state.mode, the machine takes the
// new code, sets state.clearing and restarts the interval timer; for the next
// SAFE_S seconds the lamps show the Safe State (all yellow). After that the
// new state begins, the traditional cycle always at phase 0 (road 1 green).
// So every change of selected state passes through at least SAFE_S seconds of
// all-yellow, which is the flow of the published design (emergency and
// traditional states are separated by the Safe State).
//
// Interface: timer_restart and limit_s drive interval_timer, expire comes
// back from it. The state is a packed struct, read by light_encoder together
// with em, which makes the whole a Mealy machine: a changed em turns the
// lamps yellow in the same cycle, before the state register has taken it.
//
// Timing: the state register takes em one cycle after it changes; the Safe
// interval then lasts SAFE_S seconds of timer time. Power-up state is the
// traditional cycle at phase 0, so a controller that powers up with em = 0
// shows road 1 green at once, as in the published traditional-state timing
// diagram; powering up with any other code starts with the Safe interval.
// Next-state logic and state register are written in one always_ff process,
// the state-machine style the published design says it uses.
module traffic_fsm
  import traffic_pkg::*;
#(
  parameter int unsigned SEC_W    = 7,
  parameter int unsigned GREEN_S  = 60,
  parameter int unsigned YELLOW_S = 15,
  parameter int unsigned SAFE_S   = 15
) (
  input  logic             clk,
  input  logic [2:0]       em,
  input  logic             expire,
  output logic             timer_restart,
  output logic [SEC_W-1:0] limit_s,
  output ctrl_state_t      state
);

  ctrl_state_t state_q = '{mode: ST_TRADITIONAL, clearing: 1'b0, phase: 3'd0};

  assign state         = state_q;
  assign timer_restart = (sel_t'(em) != state_q.mode);

  // Length of the interval in progress.
  always_comb begin
    if (state_q.clearing)
      limit_s = SEC_W'(SAFE_S);
    else if (state_q.mode == ST_TRADITIONAL && state_q.phase[0])
      limit_s = SEC_W'(YELLOW_S);
    else
      limit_s = SEC_W'(GREEN_S);
  end

  always_ff @(posedge clk) begin
    if (timer_restart) begin
      state_q.mode     <= sel_t'(em);
      state_q.clearing <= 1'b1;
      state_q.phase    <= 3'd0;
    end else if (expire) begin
      if (state_q.clearing) begin
        state_q.clearing <= 1'b0;
        state_q.phase    <= 3'd0;
      end else if (state_q.mode == ST_TRADITIONAL) begin
        state_q.phase <= state_q.phase + 3'd1;   // wraps 7 -> 0
      end
    end
  end

endmodule
