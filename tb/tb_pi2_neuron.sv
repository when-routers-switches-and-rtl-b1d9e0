// tb_pi2_neuron: self-checking test of one differential pi2 neuron.
//
// Random sets of presynaptic events (polarity, W+ and W- delay codes,
// arrival time) are fed to the neuron.  The expected arrival times at the two
// shared queues follow the paper's Eq. 7-8 steering (H1: T+ with W+, T- with
// W-; H2: T+ with W-, T- with W+) and TET = T_i + delay.  A reference model
// of the pi2-CBS gate (first K arrivals accepted, credit = sum of ages, spike
// at the first time unit where credit >= M) gives T~+ and T~-, from which the
// expected output events follow: in bypass mode + at T~- and - at T~+; in
// scheduled mode + at V + T_j and - at V - T_j with T_j = ReLU(alpha (T~- -
// T~+)) clamped to V (Eq. 9-10).  Shared-queue drops and time-outs are
// checked as well; the output receiver is always ready.
module tb_pi2_neuron;
  import pi2_pkg::*;

  localparam int P = 3, KMAX = 8, TICK_DIV = 8;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t now;
  logic  tick;
  pi2_timebase #(.TICK_DIV(TICK_DIV)) u_tb (.clk, .rst_n, .start, .now, .tick);

  neuron_cfg_t  cfg;
  time_t        max_time [2**P];
  logic         syn_valid = 0, syn_pol = 0;
  logic [P-1:0] syn_wp = 0, syn_wm = 0;
  time_t        syn_ts = 0;
  logic         ev_valid, ev_pol, ev_ready;
  logic [1:0]   sq_drop, cq_drop, fire, tmo;
  logic         late;
  assign ev_ready = 1'b1;

  pi2_neuron #(.P(P), .KMAX(KMAX)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors
  int    n_ev [2], n_cq_drop, n_sq_drop, n_fire [2], n_tmo;
  time_t ev_t [2];
  always @(posedge clk) if (rst_n && !start) begin
    if (ev_valid && ev_ready) begin n_ev[ev_pol]++; ev_t[ev_pol] = now; end
    n_cq_drop += int'(cq_drop[0]) + int'(cq_drop[1]);
    n_sq_drop += int'(sq_drop[0]) + int'(sq_drop[1]);
    for (int h = 0; h < 2; h++) n_fire[h] += int'(fire[h]);
    n_tmo += int'(tmo[0]) + int'(tmo[1]);
  end

  function automatic void ref_cbs(input int arr[$], input int kk, input longint mm,
                                  output int t_fire, output int drops);
    int acc[$];
    bit fired = 0;
    arr.sort();
    t_fire = -1; drops = 0;
    for (int t = 0; t < 2000 && !fired; t++) begin
      longint c = 0;
      // the credit gathered up to the start of unit t opens the gate at once
      foreach (acc[i]) c += longint'(t - acc[i]);
      if (acc.size() > 0 && c >= mm) begin t_fire = t; fired = 1; end
      else begin
        foreach (arr[i]) if (arr[i] == t) begin
          if (acc.size() < kk && !(mm == 0 && acc.size() > 0)) acc.push_back(arr[i]);
          else drops++;
        end
        // M = 0: the gate opens on the first arrival
        if (acc.size() > 0 && mm == 0) begin t_fire = t; fired = 1; t_fire = -t - 1; end
      end
    end
    // arrivals at or after the spike are dropped (same-unit ones already counted for M = 0)
    if (t_fire < -1) begin t_fire = -t_fire - 1; foreach (arr[i]) if (arr[i] > t_fire) drops++; end
    else if (t_fire >= 0) foreach (arr[i]) if (arr[i] >= t_fire) drops++;
  endfunction

  int tot_sched = 0, tot_bypass = 0, tot_cq_drop = 0, tot_tmo = 0;

  task automatic trial(input bit mode, input int k, input int m, input int tout);
    int n, ts [$], pol [$], wp [$], wm [$];
    int a1 [$], a2 [$];
    int tf1, tf2, d1, d2, tj, v, tlast;
    n = $urandom_range(1, 6);
    for (int i = 0; i < n; i++) begin
      ts.push_back($urandom_range(0, 12));
      pol.push_back($urandom_range(0, 1));
      wp.push_back($urandom_range(0, 7));
      wm.push_back($urandom_range(0, 7));
    end
    ts.sort();
    for (int i = 0; i < n; i++) begin
      int dp = int'(max_time[wp[i]]), dm = int'(max_time[wm[i]]);
      a1.push_back(ts[i] + (pol[i] ? dm : dp));   // H1: T+ with W+, T- with W-
      a2.push_back(ts[i] + (pol[i] ? dp : dm));   // H2: T+ with W-, T- with W+
    end
    ref_cbs(a1, k, longint'(m), tf1, d1);
    ref_cbs(a2, k, longint'(m), tf2, d2);
    v = $urandom_range(0, 60);
    cfg.k = kval_t'(k); cfg.m_thr = credit_t'(m); cfg.t_out = time_t'(tout);
    cfg.alpha = 8'($urandom_range(1, 3)); cfg.v_off = time_t'(v); cfg.sched_en = mode;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    n_ev[0] = 0; n_ev[1] = 0; ev_t[0] = 0; ev_t[1] = 0;
    n_cq_drop = 0; n_sq_drop = 0; n_fire[0] = 0; n_fire[1] = 0; n_tmo = 0;
    // feed: events of time unit t in its first cycles
    for (int i = 0; i < n; i++) begin
      while (now < time_t'(ts[i]) || tick) @(negedge clk);
      syn_valid = 1; syn_pol = pol[i]; syn_wp = P'(wp[i]); syn_wm = P'(wm[i]); syn_ts = time_t'(ts[i]);
      @(negedge clk);
      syn_valid = 0;
    end
    while (now < 200) @(negedge clk);
    check(n_sq_drop == 0, "no shaped-queue drop");
    if (tout != 0) begin
      tot_tmo += n_tmo;
      check(n_tmo > 0 && n_fire[0] == 0 && n_fire[1] == 0, "time-out instead of spike");
      if (mode) check(n_ev[0] == 0 && n_ev[1] == 0, "time-out: no output");
      return;
    end
    check(n_fire[0] == (tf1 >= 0) && n_fire[1] == (tf2 >= 0), "CBS spikes");
    check(n_cq_drop == d1 + d2, $sformatf("shared-queue drops %0d exp %0d", n_cq_drop, d1 + d2));
    tot_cq_drop += n_cq_drop;
    if (!mode) begin
      tot_bypass++;
      check(n_ev[0] == (tf2 >= 0) && n_ev[1] == (tf1 >= 0), "bypass event count");
      if (tf2 >= 0) check(ev_t[0] == time_t'(tf2), $sformatf("bypass + at %0d exp %0d", ev_t[0], tf2));
      if (tf1 >= 0) check(ev_t[1] == time_t'(tf1), $sformatf("bypass - at %0d exp %0d", ev_t[1], tf1));
    end else if (tf1 >= 0 && tf2 >= 0) begin
      time_t slot [2];
      tot_sched++;
      tj = int'(cfg.alpha) * (tf2 - tf1);
      if (tj < 0) tj = 0;
      if (tj > v) tj = v;
      slot[0] = time_t'(v + tj); slot[1] = time_t'(v - tj);
      tlast = (tf1 > tf2) ? tf1 : tf2;
      check(n_ev[0] == 1 && n_ev[1] == 1, "sched event count");
      for (int s = 0; s < 2; s++) begin
        time_t e = (slot[s] > time_t'(tlast)) ? slot[s] : time_t'(tlast);
        check(ev_t[s] == e || (slot[0] <= time_t'(tlast) && slot[1] <= time_t'(tlast) && ev_t[s] == e + 1),
              $sformatf("sched pol %0d at %0d exp %0d", s, ev_t[s], e));
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int q = 0; q < 2**P; q++) max_time[q] = time_t'(2 * q);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 120; i++)
      trial($urandom_range(0, 1), $urandom_range(1, KMAX), $urandom_range(0, 40), 0);
    for (int i = 0; i < 10; i++)
      trial($urandom_range(0, 1), 2, 5000, $urandom_range(3, 20));
    check(tot_sched > 0 && tot_bypass > 0 && tot_cq_drop > 0 && tot_tmo > 0, "all mechanisms exercised");
    $display("sched %0d bypass %0d cq_drop %0d tmo %0d", tot_sched, tot_bypass, tot_cq_drop, tot_tmo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
