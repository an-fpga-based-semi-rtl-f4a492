// traffic_control: semi-automated controller for a four-road junction.
//
// Two inputs, a clock and a 3-bit state select em, and one 24-bit output,
// out_final, with six lamps per road (red, yellow, green straight, green
// right-turn arrow, green left-turn arrow, zebra-crossing walk signal). With
// em = 0 the junction runs the traditional cycle: each road in turn gets
// 60 s of green, followed by 15 s in which it and the next road show yellow.
// Codes 1..4 open one road in every direction as an emergency and code 5
// holds the junction in the Safe State, all roads yellow. Any change of em is
// bridged by at least 15 s of Safe State before the new state's lamps appear.
//
// Structure: interval_timer counts the phase lengths in seconds,
// traffic_fsm holds the selected state and steps the phases, and
// light_encoder turns state and em into the lamp word (Mealy output).
// The ports and their names follow the published block diagram.
//
// Timing: with the default CLK_HZ = 1 one clock cycle is one second, so the
// traditional cycle repeats every 300 cycles. out_final is combinational
// from the state register and em; it changes on the clock edge that ends a
// phase, and at once (same cycle) when em changes.
//
// The concurrent assertions state the safety rules the lamp tables obey: no
// road is red and yellow together, at most one road has its straight-on
// green, a road with straight-on green is not red, a yellow road shows no
// green arrow, and the zebra-crossing walk signal is lit only on a red road.
module traffic_control
  import traffic_pkg::*;
#(
  parameter int unsigned CLK_HZ   = 1,
  parameter int unsigned GREEN_S  = 60,
  parameter int unsigned YELLOW_S = 15,
  parameter int unsigned SAFE_S   = 15
) (
  input  logic         clock,
  input  logic [2:0]   em,
  output logic [23:0]  out_final
);

  localparam int unsigned SEC_W = 7;

  logic             expire;
  logic             timer_restart;
  logic [SEC_W-1:0] limit_s;
  ctrl_state_t      state;
  lamps_t           lamps;

  interval_timer #(
    .CLK_HZ (CLK_HZ),
    .SEC_W  (SEC_W)
  ) u_timer (
    .clk     (clock),
    .restart (timer_restart),
    .limit_s (limit_s),
    .expire  (expire)
  );

  traffic_fsm #(
    .SEC_W    (SEC_W),
    .GREEN_S  (GREEN_S),
    .YELLOW_S (YELLOW_S),
    .SAFE_S   (SAFE_S)
  ) u_fsm (
    .clk           (clock),
    .em            (em),
    .expire        (expire),
    .timer_restart (timer_restart),
    .limit_s       (limit_s),
    .state         (state)
  );

  light_encoder u_enc (
    .em    (em),
    .state (state),
    .lamps (lamps)
  );

  assign out_final = lamps;

  // Safety rules of the lamp word.
  logic [NUM_ROADS-1:0] straight_green;
  logic [NUM_ROADS-1:0] red_and_yellow;
  logic [NUM_ROADS-1:0] red_and_straight;
  logic [NUM_ROADS-1:0] yellow_and_green;
  logic [NUM_ROADS-1:0] walk_not_red;

  always_comb begin
    for (int r = 0; r < NUM_ROADS; r++) begin
      straight_green[r]   = lamps[r*LAMPS_PER_ROAD + LAMP_GS];
      red_and_yellow[r]   = lamps[r*LAMPS_PER_ROAD + LAMP_R] && lamps[r*LAMPS_PER_ROAD + LAMP_Y];
      red_and_straight[r] = lamps[r*LAMPS_PER_ROAD + LAMP_R] && lamps[r*LAMPS_PER_ROAD + LAMP_GS];
      yellow_and_green[r] = lamps[r*LAMPS_PER_ROAD + LAMP_Y] &&
                            (lamps[r*LAMPS_PER_ROAD + LAMP_GS] || lamps[r*LAMPS_PER_ROAD + LAMP_GR] ||
                             lamps[r*LAMPS_PER_ROAD + LAMP_GL]);
      walk_not_red[r]     = lamps[r*LAMPS_PER_ROAD + LAMP_M] && !lamps[r*LAMPS_PER_ROAD + LAMP_R];
    end
  end

  a_one_straight_green: assert property (@(posedge clock) $countones(straight_green) <= 1);
  a_not_red_and_yellow: assert property (@(posedge clock) red_and_yellow == '0);
  a_not_red_and_go:     assert property (@(posedge clock) red_and_straight == '0);
  a_yellow_no_green:    assert property (@(posedge clock) yellow_and_green == '0);
  a_walk_only_on_red:   assert property (@(posedge clock) walk_not_red == '0);

endmodule
