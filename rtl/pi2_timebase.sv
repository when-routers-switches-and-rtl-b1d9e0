// pi2_timebase: the switch's local system time.
//
// Every shaper in the pi2 core compares transmission-eligibility times (TETs)
// with one shared clock of integer time units.  This block divides the clock
// by TICK_DIV: `tick` is high for one cycle at the end of each time unit, and
// `now` advances by one on the clock edge that ends that cycle.  `start`
// restarts an inference: `now` returns to 0 and a new time unit begins.
//
// Timing: now = t during the TICK_DIV cycles of unit t; tick is high in the
// last of them.  The paper only names a "system time"; the divider, the
// restart on `start` and TICK_DIV are this design's choices.
module pi2_timebase
  import pi2_pkg::*;
#(
  parameter int unsigned TICK_DIV = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output time_t now,
  output logic  tick
);

  localparam int unsigned CNT_W = (TICK_DIV > 1) ? $clog2(TICK_DIV) : 1;
  localparam logic [CNT_W-1:0] CNT_LAST = CNT_W'(TICK_DIV - 1);

  logic [CNT_W-1:0] cnt;

  assign tick = (cnt == CNT_LAST);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      now <= '0;
    end else if (start) begin
      cnt <= '0;
      now <= '0;
    end else if (tick) begin
      cnt <= '0;
      now <= now + 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
