// tb_light_encoder: exhaustive self-checking test of the lamp output logic.
//
// Every combination of the 3-bit input em, the stored mode, the Safe-interval
// flag and the phase is applied (1024 cases). The expected lamp word is built
// here independently of the design: the traditional words are the published
// hex table, and an emergency word is assembled road by road (the open road
// all three greens, the two roads after it red, the road before it red with
// its left-turn arrow), which for road 1 gives the published 3A0822.
module tb_light_encoder;
  import traffic_pkg::*;

  logic [2:0]  em;
  ctrl_state_t state;
  lamps_t      lamps;

  int checks = 0;
  int failures = 0;

  light_encoder dut (.em(em), .state(state), .lamps(lamps));

  localparam logic [23:0] TRAD [8] = '{
    24'h3218A6, 24'h410820, 24'h98C862, 24'h810420,
    24'h8A6321, 24'h820410, 24'h86298C, 24'h420810
  };

  // Road fields {R, Y, G straight, G right, G left, M}.
  function automatic logic [23:0] emergency(int k);   // k = 1..4
    logic [5:0] f [4];
    f[(k - 1) % 4] = 6'b001110;
    f[k % 4]       = 6'b100000;
    f[(k + 1) % 4] = 6'b100000;
    f[(k + 2) % 4] = 6'b100010;
    return {f[0], f[1], f[2], f[3]};
  endfunction

  initial begin
    logic [23:0] exp_w;
    checks++;
    if (emergency(1) != 24'h3A0822) begin
      failures++;
      $display("FAIL reference emergency word %h", emergency(1));
    end
    for (int e = 0; e < 8; e++)
      for (int m = 0; m < 8; m++)
        for (int c = 0; c < 2; c++)
          for (int p = 0; p < 8; p++) begin
            em = 3'(e);
            state.mode = sel_t'(m);
            state.clearing = c[0];
            state.phase = 3'(p);
            #1;
            if (e != m || c == 1)       exp_w = 24'h410410;
            else if (m == 0)            exp_w = TRAD[p];
            else if (m >= 1 && m <= 4)  exp_w = emergency(m);
            else                        exp_w = 24'h410410;
            checks++;
            if (lamps != exp_w) begin
              failures++;
              if (failures < 20)
                $display("FAIL em=%0d mode=%0d clr=%0d phase=%0d lamps=%h expected=%h",
                         e, m, c, p, lamps, exp_w);
            end
          end
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
