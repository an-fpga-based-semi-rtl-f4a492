// tb_traffic_control_full: the three published operating scenarios, run on
// the controller at its default parameters (one clock cycle per second,
// 60 s green, 15 s yellow, 15 s Safe interval).
//
// Three controllers power up side by side, each with the state input held at
// one code from the start, as in the published timing diagrams:
//   em = 0  traditional cycle: 3218A6 for 60 s, 410820 for 15 s, 98C862,
//           810420, 8A6321, 820410, 86298C, 420810, then again from 3218A6;
//           two full 300 s cycles are checked cycle by cycle;
//   em = 1  road 1 emergency: 410410 (all yellow) and then 3A0822, held;
//           the yellow lasts the power-up cycle plus the 15 s Safe interval;
//   em = 5  Safe State: 410410 throughout.
// Besides the per-cycle comparison, the testbench measures how long each
// lamp word stays on (run lengths) and checks them against 60 s and 15 s.
module tb_traffic_control_full;

  localparam int unsigned RUN = 620;   // cycles (= seconds) simulated

  logic        clock = 1'b1;   // first edge is a falling one
  logic [23:0] out_trad, out_em1, out_safe;

  int checks = 0;
  int failures = 0;

  traffic_control dut_trad (.clock(clock), .em(3'd0), .out_final(out_trad));
  traffic_control dut_em1  (.clock(clock), .em(3'd1), .out_final(out_em1));
  traffic_control dut_safe (.clock(clock), .em(3'd5), .out_final(out_safe));

  always #5 clock = ~clock;

  localparam logic [23:0] TRAD [8] = '{
    24'h3218A6, 24'h410820, 24'h98C862, 24'h810420,
    24'h8A6321, 24'h820410, 24'h86298C, 24'h420810
  };

  function automatic logic [23:0] trad_at(int t);
    int pos;
    pos = t % 300;
    for (int p = 0; p < 8; p++) begin
      int len;
      len = (p % 2 != 0) ? 15 : 60;
      if (pos < len) return TRAD[p];
      pos -= len;
    end
    return 24'h0;
  endfunction

  task automatic check(input string what, input int t, input logic [23:0] got,
                       input logic [23:0] want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s at %0d s: %h, expected %h", what, t, got, want);
    end
  endtask

  initial begin
    logic [23:0] last;
    int run_len;
    int runs_ok;
    last = 24'h0;
    run_len = 0;
    runs_ok = 0;
    for (int t = 0; t < RUN; t++) begin
      @(negedge clock);
      #1;
      check("traditional", t, out_trad, trad_at(t));
      check("emergency-1", t, out_em1, (t < 16) ? 24'h410410 : 24'h3A0822);
      check("safe state",  t, out_safe, 24'h410410);
      // Run lengths of the traditional words (complete runs only).
      if (t > 0 && out_trad != last) begin
        int want;
        want = (last == 24'h3218A6 || last == 24'h98C862 ||
                last == 24'h8A6321 || last == 24'h86298C) ? 60 : 15;
        checks++;
        if (run_len != want) begin
          failures++;
          $display("FAIL word %h lasted %0d s, expected %0d s", last, run_len, want);
        end else runs_ok++;
        run_len = 0;
      end
      last = out_trad;
      run_len++;
    end
    checks++;
    if (runs_ok < 15) begin
      failures++;
      $display("FAIL only %0d complete phases measured", runs_ok);
    end
    $display("phases measured: %0d", runs_ok);
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
