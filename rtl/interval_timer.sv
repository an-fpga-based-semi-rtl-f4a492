// interval_timer: the seconds counter that paces every lamp phase.
//
// A prescaler divides the clock by CLK_HZ to a one-cycle seconds tick; a
// seconds counter then counts ticks up to limit_s. On the last clock cycle of
// an interval of limit_s seconds, expire is high for one cycle and both
// counters reload to zero, so the next interval starts on the following
// cycle without any action from the controller. restart zeroes both counters
// (the interval then starts on the next cycle); it wins over expiry.
//
// Timing: after restart, expire rises on cycle limit_s * CLK_HZ (counting the
// first cycle after restart as 1) and then every limit_s * CLK_HZ cycles while
// limit_s is unchanged. A limit_s of 0 behaves as 1.
//
// The published design only says that a counter times the 60 s and 15 s
// phases from the clock, its only timing input. The prescaler, the reload
// behaviour and the default CLK_HZ = 1 (the clock input is the seconds beat,
// so one cycle is one second) are this design's choices; set CLK_HZ to the
// board clock frequency to drive the controller from a fast oscillator.
// There is no reset pin (the published controller has only a clock and the
// state input); the counters start at zero from their power-up values,
// given as declaration initialisers (FPGA configuration values). Lint tools
// note that these registers also have a synchronous restart; that is
// intended: power-up value and restart value are both zero.
module interval_timer #(
  parameter int unsigned CLK_HZ = 1,   // clock cycles per second
  parameter int unsigned SEC_W  = 7    // width of the seconds counter
) (
  input  logic             clk,
  input  logic             restart,
  input  logic [SEC_W-1:0] limit_s,
  output logic             expire
);

  localparam int unsigned PRE_W = (CLK_HZ > 1) ? $clog2(CLK_HZ) : 1;

  logic [PRE_W-1:0] pre_q = '0;
  logic [SEC_W-1:0] sec_q = '0;
  logic             tick;
  logic             last_sec;

  assign tick     = (pre_q == PRE_W'(CLK_HZ - 1));
  assign last_sec = ({1'b0, sec_q} + 1'b1) >= {1'b0, limit_s};
  assign expire   = tick && last_sec && !restart;

  always_ff @(posedge clk) begin
    if (restart) begin
      pre_q <= '0;
      sec_q <= '0;
    end else if (tick) begin
      pre_q <= '0;
      sec_q <= last_sec ? '0 : sec_q + 1'b1;
    end else begin
      pre_q <= pre_q + 1'b1;
    end
  end

endmodule
