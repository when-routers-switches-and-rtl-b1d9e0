// tb_pi2_timebase: self-checking test of the system time base.
//
// The time base divides the clock into time units of TICK_DIV cycles.  Checks:
// `tick` is high exactly in the last cycle of every unit, `now` increases by
// one right after each tick and never otherwise, and `start` (pulsed at
// random moments) restarts the count at time 0 with a full unit.
module tb_pi2_timebase;
  import pi2_pkg::*;
  localparam int TICK_DIV = 5;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  time_t now;
  logic  tick;

  pi2_timebase #(.TICK_DIV(TICK_DIV)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  time_t exp_now = 0;
  always @(posedge clk) if (rst_n) begin
    check(now == exp_now, $sformatf("now %0d exp %0d", now, exp_now));
    check(tick == (cyc == TICK_DIV - 1), "tick position");
    if (start) begin cyc = 0; exp_now = 0; end
    else if (cyc == TICK_DIV - 1) begin cyc = 0; exp_now++; end
    else cyc++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20) begin
      repeat ($urandom_range(1, 300)) @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
    end
    repeat (100) @(negedge clk);
    check(now > 10, "time advances");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
