// tb_pi2_egress: self-checking test of one egress pipeline (a pool of pi2
// neurons behind one output port).
//
// The neuron parameters and the per-PCP delays are written through the
// configuration port, then random synaptic events are sent to random
// neurons.  A reference model (Eq. 7-8 steering, TET = T_i + delay, the
// pi2-CBS gate, Eq. 9-10 scheduling) predicts each neuron's output events.
// Checks: every expected (neuron, polarity) event leaves the port once, with
// the port's address prefix, no earlier than its time and at most two time
// units later (the port carries one event per cycle); the status counters
// report the predicted spikes and shared-queue drops; a burst into one
// shaped queue overflows it (counted); the mode register switches between
// bypass and scheduled output; start clears the counters; K is clamped.
module tb_pi2_egress;
  import pi2_pkg::*;
  localparam int M = 8, P = 3, KMAX = 4, PORT_W = 2, PORT_ID = 2, TICK_DIV = 8;
  localparam int LW = $clog2(M);

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  time_t now;
  logic  tick;
  pi2_timebase #(.TICK_DIV(TICK_DIV)) u_tb (.clk, .rst_n, .start, .now, .tick);

  logic           cfg_we = 0;
  logic [7:0]     cfg_addr = 0;
  logic [C_W-1:0] cfg_data = 0;
  logic           syn_valid = 0, syn_pol = 0;
  logic [LW-1:0]  syn_dlocal = 0;
  logic [P-1:0]   syn_wp = 0, syn_wm = 0;
  time_t          syn_ts = 0;
  logic           out_valid, out_pol, out_ready = 1;
  logic [PORT_W+LW-1:0] out_addr;
  logic [15:0]    cnt_sq_drop, cnt_cq_drop, cnt_fire, cnt_tmo, cnt_late;

  pi2_egress #(.M(M), .P(P), .KMAX(KMAX), .PORT_W(PORT_W), .PORT_ID(PORT_ID)) dut (.*);

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

  int    n_out [M][2];
  time_t t_out [M][2];
  int    bad_addr = 0;
  always @(posedge clk) if (rst_n && !start) begin
    if (out_valid && out_ready) begin
      int i;
      i = int'(out_addr[LW-1:0]);
      if (int'(out_addr[PORT_W+LW-1:LW]) != PORT_ID) bad_addr++;
      n_out[i][out_pol]++;
      t_out[i][out_pol] = now;
    end
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

  task automatic cfg(input cfg_reg_e r, input int q, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {4'(r), 4'(q)}; cfg_data = C_W'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic restart();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < M; i++) begin n_out[i][0] = 0; n_out[i][1] = 0; t_out[i][0] = 0; t_out[i][1] = 0; end
  endtask

  int delay [8];

  // One inference with random events; mode 0 bypass, 1 scheduled.
  task automatic inference(input bit mode, input int k, input int mthr, input int v, input int a);
    int a1 [M][$], a2 [M][$];
    int ts [$], nid [$], pol [$], wp [$], wm [$];
    int n, exp_fire = 0, exp_cq = 0;
    cfg(CFG_MODE, 0, int'(mode));
    cfg(CFG_K, 0, k);
    cfg(CFG_M, 0, mthr);
    cfg(CFG_V, 0, v);
    cfg(CFG_ALPHA, 0, a);
    restart();
    n = $urandom_range(10, 30);
    for (int e = 0; e < n; e++) ts.push_back($urandom_range(0, 15));
    ts.sort();
    for (int e = 0; e < n; e++) begin
      nid.push_back($urandom_range(0, M - 1));
      pol.push_back($urandom_range(0, 1));
      wp.push_back($urandom_range(0, 7));
      wm.push_back($urandom_range(0, 7));
      a1[nid[e]].push_back(ts[e] + delay[pol[e] ? wm[e] : wp[e]]);
      a2[nid[e]].push_back(ts[e] + delay[pol[e] ? wp[e] : wm[e]]);
    end
    for (int e = 0; e < n; e++) begin
      while (now < time_t'(ts[e]) || tick) @(negedge clk);
      syn_valid = 1; syn_dlocal = LW'(nid[e]); syn_pol = pol[e]; syn_wp = P'(wp[e]); syn_wm = P'(wm[e]);
      syn_ts = time_t'(ts[e]);
      @(negedge clk);
      syn_valid = 0;
    end
    while (now < 150) @(negedge clk);
    for (int i = 0; i < M; i++) begin
      int tf1, tf2, d1, d2;
      ref_cbs(a1[i], k, longint'(mthr), tf1, d1);
      ref_cbs(a2[i], k, longint'(mthr), tf2, d2);
      exp_fire += int'(tf1 >= 0) + int'(tf2 >= 0);
      exp_cq += d1 + d2;
      if (!mode) begin
        check(n_out[i][0] == int'(tf2 >= 0) && n_out[i][1] == int'(tf1 >= 0), $sformatf("neuron %0d bypass count", i));
        if (tf2 >= 0) check(t_out[i][0] >= time_t'(tf2) && t_out[i][0] <= time_t'(tf2 + 2),
                            $sformatf("neuron %0d + at %0d exp %0d", i, t_out[i][0], tf2));
        if (tf1 >= 0) check(t_out[i][1] >= time_t'(tf1) && t_out[i][1] <= time_t'(tf1 + 2),
                            $sformatf("neuron %0d - at %0d exp %0d", i, t_out[i][1], tf1));
      end else if (tf1 >= 0 && tf2 >= 0) begin
        int tj, tl;
        int slot [2];
        tj = a * (tf2 - tf1); if (tj < 0) tj = 0; if (tj > v) tj = v;
        slot[0] = v + tj; slot[1] = v - tj;
        tl = (tf1 > tf2) ? tf1 : tf2;
        for (int s = 0; s < 2; s++) begin
          int e;
          e = (slot[s] > tl) ? slot[s] : tl;
          check(n_out[i][s] == 1 && t_out[i][s] >= time_t'(e) && t_out[i][s] <= time_t'(e + 2),
                $sformatf("neuron %0d sched pol %0d at %0d exp %0d", i, s, t_out[i][s], e));
        end
      end else check(n_out[i][0] == 0 && n_out[i][1] == 0, "sched: no output without both spikes");
    end
    check(int'(cnt_fire) == exp_fire, $sformatf("cnt_fire %0d exp %0d", cnt_fire, exp_fire));
    check(int'(cnt_cq_drop) == exp_cq, $sformatf("cnt_cq_drop %0d exp %0d", cnt_cq_drop, exp_cq));
    check(cnt_sq_drop == 0 && cnt_tmo == 0, "no shaped-queue drop or time-out");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < 8; q++) begin delay[q] = 3 * q; cfg(CFG_MAXTIME, q, delay[q]); end
    for (int r = 0; r < 12; r++)
      inference(r % 3 == 2, $urandom_range(1, KMAX), $urandom_range(0, 30), $urandom_range(20, 60), $urandom_range(1, 2));
    // K above KMAX is clamped: with K = 100 written, a 5th arrival is dropped
    cfg(CFG_MODE, 0, 0); cfg(CFG_K, 0, 100); cfg(CFG_M, 0, 1000); cfg(CFG_TOUT, 0, 0);
    restart();
    for (int e = 0; e < 5; e++) begin
      while (tick) @(negedge clk);
      syn_valid = 1; syn_dlocal = 3; syn_pol = 0; syn_wp = P'(e); syn_wm = P'(e); syn_ts = now;
      @(negedge clk); syn_valid = 0;
    end
    repeat (200) @(negedge clk);
    check(cnt_cq_drop == 2, $sformatf("K clamped to KMAX: drops %0d", cnt_cq_drop));
    // shaped-queue overflow: 6 events into one PCP queue of depth KMAX
    restart();
    for (int e = 0; e < 6; e++) begin
      while (tick) @(negedge clk);
      syn_valid = 1; syn_dlocal = 5; syn_pol = 1; syn_wp = 7; syn_wm = 7; syn_ts = now;
      @(negedge clk); syn_valid = 0;
    end
    repeat (10) @(negedge clk);
    check(cnt_sq_drop == 4, $sformatf("shaped-queue drops %0d exp 4", cnt_sq_drop));
    // time-out
    cfg(CFG_TOUT, 0, 5);
    restart();
    while (tick) @(negedge clk);
    syn_valid = 1; syn_dlocal = 1; syn_pol = 0; syn_wp = 0; syn_wm = 0; syn_ts = now;
    @(negedge clk); syn_valid = 0;
    repeat (100) @(negedge clk);
    check(cnt_tmo == 2 && cnt_fire == 0, $sformatf("time-outs %0d", cnt_tmo));
    restart();
    check(cnt_tmo == 0 && cnt_sq_drop == 0, "start clears the counters");
    check(bad_addr == 0, "output address carries the port id");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
