// tb_pi2_diff_sched: self-checking test of the differential output stage.
//
// Each trial restarts the block, picks a mode, alpha, V and the two CBS spike
// times, pulses fire_p / fire_m when the time base reaches them and collects
// the events the block emits.  Expected results follow the paper's Eq. 9-10
// (T_j = ReLU(alpha (T~- - T~+)), T+ = V + T_j, T- = V - T_j) with this
// design's clamp T_j <= V; in bypass mode the H2 spike leaves as polarity +
// at T~- and the H1 spike as polarity - at T~+.  A time-out in either queue
// in scheduled mode must suppress both events.  With the receiver always
// ready (time unit = 3 cycles, spikes in its first cycle), each event must be offered exactly at max(slot time, compute time);
// with a random ready it may be later but never earlier.
module tb_pi2_diff_sched;
  import pi2_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t      now = 0;
  logic       sched_en = 0;
  logic [7:0] alpha = 1;
  time_t      v_off = 0;
  logic       fire_p = 0, fire_m = 0, tmo_p = 0, tmo_m = 0;
  time_t      t_p = 0, t_m = 0;
  logic       ev_valid, ev_pol, ev_ready = 1, late;

  pi2_diff_sched dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event monitor
  int    n_ev [2];
  time_t ev_t [2];
  int    n_late;
  always @(posedge clk) if (rst_n && !start) begin
    if (ev_valid && ev_ready) begin n_ev[ev_pol]++; ev_t[ev_pol] = now; end
    if (late) n_late++;
  end

  int n_trials_sched = 0, n_trials_bypass = 0, n_tmo = 0, n_late_total = 0;

  task automatic trial(input bit mode, input int a, input int v, input int tp, input int tm,
                       input bit tmo_sel, input bit always_ready);
    time_t slot [2];
    int    tj, late_exp, tlast;
    if (!mode) tmo_sel = 0;     // time-outs are tested in scheduled mode
    @(negedge clk);
    start = 1; now = 0; sched_en = mode; alpha = 8'(a); v_off = time_t'(v);
    @(negedge clk);
    start = 0;
    n_ev[0] = 0; n_ev[1] = 0; n_late = 0; ev_t[0] = 0; ev_t[1] = 0;
    tlast = (tp > tm) ? tp : tm;
    for (int t = 0; t < 200; t++) begin
      for (int c = 0; c < 3; c++) begin
        fire_p = (c == 0) && (t == tp) && !(tmo_sel && tp >= tm);
        tmo_p  = (c == 0) && (t == tp) &&  (tmo_sel && tp >= tm);
        fire_m = (c == 0) && (t == tm) && !(tmo_sel && tm > tp);
        tmo_m  = (c == 0) && (t == tm) &&  (tmo_sel && tm > tp);
        t_p = time_t'(tp); t_m = time_t'(tm);
        ev_ready = always_ready ? 1'b1 : ($urandom_range(0, 2) != 0);
        @(negedge clk);
      end
      now = now + 1;
    end
    fire_p = 0; fire_m = 0; tmo_p = 0; tmo_m = 0;
    if (!mode) begin
      n_trials_bypass++;
      check(n_ev[0] == 1 && n_ev[1] == 1, $sformatf("bypass: events %0d/%0d", n_ev[0], n_ev[1]));
      check(ev_t[0] >= time_t'(tm) && ev_t[1] >= time_t'(tp), "bypass: not early");
      if (always_ready) check(ev_t[0] == time_t'(tm) && ev_t[1] == time_t'(tp),
                              $sformatf("bypass: times %0d/%0d exp %0d/%0d", ev_t[0], ev_t[1], tm, tp));
    end else if (tmo_sel) begin
      n_tmo++;
      check(n_ev[0] == 0 && n_ev[1] == 0, "time-out suppresses output");
    end else begin
      n_trials_sched++;
      tj = a * (tm - tp);
      if (tj < 0) tj = 0;
      if (tj > v) tj = v;
      slot[0] = time_t'(v + tj);
      slot[1] = time_t'(v - tj);
      late_exp = (v - tj) < tlast;   // computed one cycle after the later spike, same time unit
      check(n_ev[0] == 1 && n_ev[1] == 1, $sformatf("sched: events %0d/%0d", n_ev[0], n_ev[1]));
      check(n_late == late_exp, $sformatf("late %0d exp %0d", n_late, late_exp));
      n_late_total += n_late;
      for (int s = 0; s < 2; s++) begin
        time_t exp_t = (slot[s] > time_t'(tlast)) ? slot[s] : time_t'(tlast);
        check(ev_t[s] >= exp_t, $sformatf("sched pol %0d early: %0d < %0d", s, ev_t[s], exp_t));
        // when both slots have passed, the two events leave on consecutive
        // cycles and the second may fall into the next time unit
        if (always_ready)
          check(ev_t[s] == exp_t || (slot[0] <= time_t'(tlast) && slot[1] <= time_t'(tlast) && ev_t[s] == exp_t + 1), $sformatf("sched pol %0d at %0d exp %0d (a=%0d v=%0d tp=%0d tm=%0d)",
                                            s, ev_t[s], exp_t, a, v, tp, tm));
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: Eq. 9-10 with alpha 2, V 40, T~+ 10, T~- 15 -> T_j 10, T+ 50, T- 30
    trial(1, 2, 40, 10, 15, 0, 1);
    check(ev_t[0] == 50 && ev_t[1] == 30, "directed Eq. 9-10");
    // directed: T~- < T~+ -> ReLU gives 0, both at V
    trial(1, 3, 40, 20, 12, 0, 1);
    check(ev_t[0] == 40 && ev_t[1] == 40, "directed ReLU zero");
    // mode switch back to bypass
    trial(0, 1, 40, 20, 12, 0, 1);
    check(ev_t[0] == 12 && ev_t[1] == 20, "directed bypass");
    for (int i = 0; i < 150; i++)
      trial($urandom_range(0, 3) != 0, $urandom_range(1, 4), $urandom_range(0, 80),
            $urandom_range(0, 50), $urandom_range(0, 50), $urandom_range(0, 5) == 0,
            $urandom_range(0, 1));
    check(n_trials_sched > 0 && n_trials_bypass > 0 && n_tmo > 0 && n_late_total > 0,
          "all mechanisms exercised");
    $display("sched %0d bypass %0d timeout %0d late %0d", n_trials_sched, n_trials_bypass, n_tmo, n_late_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
