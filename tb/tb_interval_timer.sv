// tb_interval_timer: self-checking test of the seconds/interval timer.
//
// Runs the timer with a prescale of 3 clock cycles per second and checks
// expire on every cycle against a cycle count kept by the testbench: after a
// restart, expire must be high exactly on cycles n with n mod (limit*3) == 0,
// counting the first cycle after the restart edge as n = 1. Covers several
// limits, a restart in the middle of an interval, restart overriding expiry,
// and a limit of 0 (treated as 1).
module tb_interval_timer;

  localparam int unsigned HZ    = 3;
  localparam int unsigned SEC_W = 7;

  logic             clk = 1'b0;
  logic             restart;
  logic [SEC_W-1:0] limit_s;
  logic             expire;

  int checks = 0;
  int failures = 0;
  int n = 0;            // cycles since the last restart edge
  int pulses = 0;

  interval_timer #(.CLK_HZ(HZ), .SEC_W(SEC_W)) dut (
    .clk(clk), .restart(restart), .limit_s(limit_s), .expire(expire)
  );

  always #5 clk = ~clk;

  // One clock cycle: set the inputs, check expire, take the edge.
  task automatic cycle(input logic rst, input int lim);
    int per;
    logic exp_e;
    @(negedge clk);
    restart = rst;
    limit_s = SEC_W'(lim);
    #1;
    per = ((lim == 0) ? 1 : lim) * HZ;
    exp_e = !rst && (n > 0) && ((n % per) == 0);
    checks++;
    if (expire !== exp_e) begin
      failures++;
      $display("FAIL limit=%0d n=%0d restart=%0b expire=%0b expected=%0b",
               lim, n, rst, expire, exp_e);
    end
    if (expire) pulses++;
    @(posedge clk);
    n = rst ? 1 : n + 1;
  endtask

  initial begin
    restart = 1'b1;
    limit_s = '0;
    // Several limits, each for a few whole intervals.
    foreach (lims[i]) begin
      cycle(1'b1, lims[i]);
      repeat (lims[i] * HZ * 3 + 2) cycle(1'b0, lims[i]);
    end
    // Restart in the middle of an interval.
    cycle(1'b1, 4);
    repeat (7) cycle(1'b0, 4);
    cycle(1'b1, 4);
    repeat (30) cycle(1'b0, 4);
    // Restart on the cycle that would have expired.
    cycle(1'b1, 2);
    repeat (5) cycle(1'b0, 2);
    cycle(1'b1, 2);
    repeat (12) cycle(1'b0, 2);
    // Limit 0 acts as 1.
    cycle(1'b1, 0);
    repeat (10) cycle(1'b0, 0);
    checks++;
    if (pulses < 15) begin
      failures++;
      $display("FAIL too few expiries seen: %0d", pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lims [4] = '{1, 2, 5, 60};

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
