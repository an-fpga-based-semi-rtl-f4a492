// tb_traffic_control: end-to-end self-checking test of the junction
// controller.
//
// The controller runs at reduced, mutually distinct timings (2 clock cycles
// per second, green 6 s, yellow 3 s, Safe interval 4 s) so that a wrong
// duration shows up as a wrong lamp word. The expected word on every cycle
// comes from a time-based reference kept here: it only remembers which code
// was last taken and how many cycles ago, and derives the phase by dividing
// the elapsed time, rather than stepping a state machine.
//
// The stimulus walks through every mechanism of the design and counts each:
// all eight traditional phases and the wrap from the last to the first, the
// same-cycle (Mealy) yellow when the selection changes, the Safe interval
// inserted before a new state, each of the four emergencies held beyond the
// green time, the Safe State held beyond its 15 s equivalent, a spare code,
// and a change of selection in the middle of a phase. A mechanism that never
// occurs counts as a failure.
module tb_traffic_control;

  localparam int unsigned HZ = 2, G = 6, Y = 3, S = 4;
  localparam int unsigned CYCLE = 4 * (G + Y) * HZ;   // one traditional cycle

  logic        clock = 1'b1;   // first edge is a falling one, so no rising edge precedes the first check
  logic [2:0]  em;
  logic [23:0] out_final;

  int checks = 0;
  int failures = 0;

  traffic_control #(.CLK_HZ(HZ), .GREEN_S(G), .YELLOW_S(Y), .SAFE_S(S)) dut (
    .clock(clock), .em(em), .out_final(out_final)
  );

  always #5 clock = ~clock;

  localparam logic [23:0] TRAD [8] = '{
    24'h3218A6, 24'h410820, 24'h98C862, 24'h810420,
    24'h8A6321, 24'h820410, 24'h86298C, 24'h420810
  };
  localparam logic [23:0] SAFE = 24'h410410;

  function automatic logic [23:0] emergency(int k);
    logic [5:0] f [4];
    f[(k - 1) % 4] = 6'b001110;
    f[k % 4]       = 6'b100000;
    f[(k + 1) % 4] = 6'b100000;
    f[(k + 2) % 4] = 6'b100010;
    return {f[0], f[1], f[2], f[3]};
  endfunction

  // Reference: code taken, cycles since it was taken, and whether it was
  // taken at power-up (no Safe interval) or by a change.
  int  ref_sel = 0;
  int  ref_age = 0;
  bit  ref_changed = 0;

  // Mechanism counters.
  int seen_phase [8];
  int n_wrap = 0, n_mealy = 0, n_safe_interval = 0, n_safe_hold = 0;
  int n_spare = 0, n_midphase = 0;
  int seen_emerg [5];
  int prev_phase = -1;

  function automatic int trad_phase(int t);
    int pos;
    pos = t % CYCLE;
    for (int p = 0; p < 8; p++) begin
      int len;
      len = ((p % 2 != 0) ? Y : G) * HZ;
      if (pos < len) return p;
      pos -= len;
    end
    return 0;
  endfunction

  function automatic logic [23:0] expected(int e);
    int t;
    if (e != ref_sel) return SAFE;
    t = ref_age;
    if (ref_changed) begin
      if (t < S * HZ) return SAFE;
      t -= S * HZ;
    end
    if (ref_sel == 0) return TRAD[trad_phase(t)];
    if (ref_sel >= 1 && ref_sel <= 4) return emergency(ref_sel);
    return SAFE;
  endfunction

  // Hold em at e for n cycles, checking out_final every cycle.
  task automatic hold(input int e, input int n);
    for (int i = 0; i < n; i++) begin
      logic [23:0] w;
      @(negedge clock);
      em = 3'(e);
      #1;
      w = expected(e);
      checks++;
      if (out_final != w) begin
        failures++;
        if (failures < 20)
          $display("FAIL t=%0t em=%0d out_final=%h expected=%h", $time, e, out_final, w);
      end
      // Mechanism bookkeeping from the reference's view.
      if (e != ref_sel) begin
        n_mealy++;
        if (ref_sel == 0 && !ref_changed && ref_age % (G * HZ) != 0) n_midphase++;
        else if (ref_sel == 0 && ref_changed && ref_age > S * HZ &&
                 ((ref_age - S * HZ) % CYCLE) % ((G + Y) * HZ) != 0) n_midphase++;
      end else begin
        int t;
        t = ref_age - (ref_changed ? S * HZ : 0);
        if (ref_changed && ref_age == S * HZ - 1) n_safe_interval++;
        if (t >= 0 && ref_sel == 0) begin
          int p;
          p = trad_phase(t);
          seen_phase[p]++;
          if (prev_phase == 7 && p == 0) n_wrap++;
          prev_phase = p;
        end else prev_phase = -1;
        if (ref_sel >= 1 && ref_sel <= 4 && t == G * HZ + 1) seen_emerg[ref_sel]++;
        if (ref_sel == 5 && ref_age == 15 * HZ + 1) n_safe_hold++;
        if (ref_sel >= 6) n_spare++;
      end
      @(posedge clock);
      if (e != ref_sel) begin
        ref_sel = e;
        ref_age = 0;
        ref_changed = 1;
      end else begin
        ref_age++;
      end
    end
  endtask

  initial begin
    em = 3'd0;
    hold(0, 2 * CYCLE + 5);            // power-up, two full cycles and a wrap
    hold(1, S * HZ + G * HZ * 2);      // emergency 1, held past green time
    hold(0, S * HZ + 40);              // back to traditional, stop mid-phase
    hold(2, S * HZ + G * HZ + 5);
    hold(3, 3);                        // change during the Safe interval
    hold(3, S * HZ + G * HZ + 5);
    hold(4, S * HZ + G * HZ + 5);
    hold(5, 20 * HZ);                  // Safe State, held past 15 s
    hold(6, S * HZ + 4);               // spare codes
    hold(7, S * HZ + 4);
    hold(0, S * HZ + CYCLE + 3);
    // Mechanism coverage.
    for (int p = 0; p < 8; p++) begin
      checks++;
      if (seen_phase[p] == 0) begin failures++; $display("FAIL phase %0d never shown", p); end
    end
    for (int k = 1; k <= 4; k++) begin
      checks++;
      if (seen_emerg[k] == 0) begin failures++; $display("FAIL emergency %0d never held", k); end
    end
    checks++; if (n_wrap == 0)          begin failures++; $display("FAIL no cycle wrap"); end
    checks++; if (n_mealy == 0)         begin failures++; $display("FAIL no same-cycle yellow"); end
    checks++; if (n_safe_interval == 0) begin failures++; $display("FAIL no Safe interval"); end
    checks++; if (n_safe_hold == 0)     begin failures++; $display("FAIL no Safe State hold"); end
    checks++; if (n_spare == 0)         begin failures++; $display("FAIL no spare code"); end
    checks++; if (n_midphase == 0)      begin failures++; $display("FAIL no mid-phase change"); end
    $display("mechanisms: phases %0d %0d %0d %0d %0d %0d %0d %0d, wraps %0d, same-cycle yellow %0d, safe intervals %0d, safe holds %0d, emergencies %0d %0d %0d %0d, spare cycles %0d, mid-phase changes %0d",
             seen_phase[0], seen_phase[1], seen_phase[2], seen_phase[3], seen_phase[4],
             seen_phase[5], seen_phase[6], seen_phase[7], n_wrap, n_mealy, n_safe_interval,
             n_safe_hold, seen_emerg[1], seen_emerg[2], seen_emerg[3], seen_emerg[4],
             n_spare, n_midphase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
