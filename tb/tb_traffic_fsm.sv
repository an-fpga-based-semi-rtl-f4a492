// tb_traffic_fsm: self-checking test of the controller state machine.
//
// The interval timer is replaced by the testbench, which drives expire
// directly, so each check is about the state machine alone. Phase lengths
// are set to distinct small values (green 7 s, yellow 3 s, safe 2 s) so that
// the limit_s output shows which interval the machine thinks it is in. The
// expected values are written out by hand for a scripted sequence: power-up,
// two full traditional cycles, emergency entry and hold, return to the
// traditional cycle through the Safe interval, a change of selection in the
// middle of a phase, the Safe State hold and the spare codes.
module tb_traffic_fsm;
  import traffic_pkg::*;

  localparam int unsigned SEC_W = 7;
  localparam int unsigned G = 7, Y = 3, S = 2;

  logic             clk = 1'b0;
  logic [2:0]       em;
  logic             expire;
  logic             timer_restart;
  logic [SEC_W-1:0] limit_s;
  ctrl_state_t      state;

  int checks = 0;
  int failures = 0;

  traffic_fsm #(.SEC_W(SEC_W), .GREEN_S(G), .YELLOW_S(Y), .SAFE_S(S)) dut (
    .clk(clk), .em(em), .expire(expire), .timer_restart(timer_restart),
    .limit_s(limit_s), .state(state)
  );

  always #5 clk = ~clk;

  // Apply inputs for one cycle; check the outputs before the edge.
  task automatic step(input logic [2:0] e, input logic x,
                      input int exp_mode, input logic exp_clr, input int exp_phase,
                      input logic exp_rst, input int exp_lim);
    @(negedge clk);
    em = e;
    expire = x;
    #1;
    checks++;
    if (int'(state.mode) != exp_mode || state.clearing != exp_clr ||
        int'(state.phase) != exp_phase || timer_restart != exp_rst ||
        int'(limit_s) != exp_lim) begin
      failures++;
      $display("FAIL t=%0t em=%0d expire=%0b: mode=%0d clr=%0b phase=%0d rst=%0b lim=%0d, expected %0d %0b %0d %0b %0d",
               $time, e, x, state.mode, state.clearing, state.phase, timer_restart, limit_s,
               exp_mode, exp_clr, exp_phase, exp_rst, exp_lim);
    end
  endtask

  initial begin
    em = 3'd0;
    expire = 1'b0;
    // Power-up: traditional, phase 0, no Safe interval.
    step(0, 0, 0, 0, 0, 0, G);
    step(0, 0, 0, 0, 0, 0, G);
    // Two traditional cycles: phases step only on expire, limits alternate.
    for (int k = 0; k < 16; k++) begin
      step(0, 0, 0, 0, k % 8, 0, (k % 2 != 0) ? Y : G);
      step(0, 1, 0, 0, k % 8, 0, (k % 2 != 0) ? Y : G);
    end
    step(0, 0, 0, 0, 0, 0, G);
    // Select the road 1 emergency: restart requested while em differs.
    step(1, 0, 0, 0, 0, 1, G);
    step(1, 0, 1, 1, 0, 0, S);     // Safe interval
    step(1, 1, 1, 1, 0, 0, S);     // it ends
    step(1, 0, 1, 0, 0, 0, G);     // emergency held
    step(1, 1, 1, 0, 0, 0, G);     // expiries do not end it
    step(1, 1, 1, 0, 0, 0, G);
    // Back to the traditional cycle through the Safe interval.
    step(0, 1, 1, 0, 0, 1, G);     // restart wins over expire
    step(0, 0, 0, 1, 0, 0, S);
    step(0, 1, 0, 1, 0, 0, S);
    step(0, 0, 0, 0, 0, 0, G);     // road 1 green again
    step(0, 1, 0, 0, 0, 0, G);
    step(0, 1, 0, 0, 1, 0, Y);
    step(0, 1, 0, 0, 2, 0, G);
    step(0, 0, 0, 0, 3, 0, Y);
    // Change in mid-phase to emergency 3, then straight to emergency 4.
    step(3, 0, 0, 0, 3, 1, Y);
    step(3, 0, 3, 1, 0, 0, S);
    step(4, 0, 3, 1, 0, 1, S);     // another change restarts the Safe interval
    step(4, 1, 4, 1, 0, 0, S);
    step(4, 0, 4, 0, 0, 0, G);
    // Safe State: held with no end.
    step(5, 0, 4, 0, 0, 1, G);
    step(5, 1, 5, 1, 0, 0, S);
    step(5, 1, 5, 0, 0, 0, G);
    step(5, 1, 5, 0, 0, 0, G);
    // Spare codes and emergency 2.
    step(6, 0, 5, 0, 0, 1, G);
    step(7, 0, 6, 1, 0, 1, S);
    step(2, 0, 7, 1, 0, 1, S);
    step(2, 1, 2, 1, 0, 0, S);
    step(2, 0, 2, 0, 0, 0, G);
    // Return to traditional and step to phase 1.
    step(0, 0, 2, 0, 0, 1, G);
    step(0, 1, 0, 1, 0, 0, S);
    step(0, 1, 0, 0, 0, 0, G);
    step(0, 0, 0, 0, 1, 0, Y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
