// tb_pi2_switch: end-to-end test of the pi2 switch at its default size (no
// parameter override): H = 4 ports, M = 32 neurons per port, pools of HP = 16,
// P = 3 delay bits, shaped queues of KMAX = 140, 64 cycles per time unit.
//
// A two-layer differential spiking network is mapped onto the switch the way
// the paper maps a network onto a switch:
//   * input neurons 0..15 (port 0, pool 0) fan out through port 0's routing
//     table to the hidden neurons 0..15 of egress port 1 (pool 0);
//   * hidden spikes leave port 1, loop back into input port 1 and fan out
//     through port 1's table to output neurons 16..31 of egress port 3
//     (pool 1), whose spikes leave the switch on the external output;
//   * input pool 1 (neurons 16..31) has no table entry: its events are
//     unrouted.
// Synaptic weights are random W+/W- delay codes; each egress port has its
// own per-PCP delays, K and M.
//
// Checking: a reference model (Eq. 7-8 steering, TET = time stamp + delay,
// pi2-CBS gate with the first K arrivals and threshold M, Eq. 9-10 output
// scheduling, one spike per polarity) predicts the hidden spikes from the
// time-stamped input events and the output spikes from the hidden spikes as
// observed on the loop-back port (time-stamped on entry, exactly as the
// switch does).  Every predicted spike must appear once, not before its
// time and only a few time units after it (port serialisation); no other
// spike may appear.  The status counters must match the model's spike and
// shared-queue drop counts.
//
// Inferences alternate the hidden layer between bypass and scheduled
// (differential) output, and the receiver of the external output applies
// random back-pressure.  Extra inferences exercise time-outs, shaped-queue
// overflow (more than KMAX events into one PCP queue) and unrouted events.
// All mechanisms are counted and reported, and each must have occurred.
module tb_pi2_switch;
  import pi2_pkg::*;

  localparam int H = 4, M = 32, HP = 16, P = 3, KMAX = 140, TICK_DIV = 64;
  localparam int LW = 5, PW = 2, AW = 7, HW = 4;
  localparam int NIN = 16;                 // input / hidden / output neurons

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t          now;
  logic           ext_in_valid = 0, ext_in_ready, ext_in_pol = 0;
  logic [AW-1:0]  ext_in_addr = 0;
  logic           ext_out_valid, ext_out_ready = 1, ext_out_pol;
  logic [AW-1:0]  ext_out_addr;
  logic           cfg_we = 0, cfg_lut = 0;
  logic [PW-1:0]  cfg_port = 0;
  logic [23:0]    cfg_addr = 0;
  logic [C_W-1:0] cfg_data = 0;
  logic [15:0]    cnt_sq_drop [H-1], cnt_cq_drop [H-1], cnt_fire [H-1], cnt_tmo [H-1], cnt_late [H-1];
  logic [15:0]    cnt_unrouted;

  pi2_switch dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model ---
  int w1p [NIN][NIN], w1m [NIN][NIN];      // input i -> hidden j
  int w2p [NIN][NIN], w2m [NIN][NIN];      // hidden i -> output j
  int d1 [8], d3 [8];                      // per-PCP delays of egress 1 and 3

  function automatic void ref_cbs(input int arr[$], input int kk, input longint mm,
                                  output int t_fire, output int drops);
    int acc[$];
    bit fired = 0;
    arr.sort();
    t_fire = -1; drops = 0;
    for (int t = 0; t < 3000 && !fired; t++) begin
      longint c = 0;
      foreach (acc[i]) c += longint'(t - acc[i]);
      if (acc.size() > 0 && c >= mm) begin t_fire = t; fired = 1; end
      else begin
        foreach (arr[i]) if (arr[i] == t) begin
          if (acc.size() < kk && !(mm == 0 && acc.size() > 0)) acc.push_back(arr[i]);
          else drops++;
        end
        if (acc.size() > 0 && mm == 0) begin t_fire = t; fired = 1; t_fire = -t - 1; end
      end
    end
    if (t_fire < -1) begin t_fire = -t_fire - 1; foreach (arr[i]) if (arr[i] > t_fire) drops++; end
    else if (t_fire >= 0) foreach (arr[i]) if (arr[i] >= t_fire) drops++;
  endfunction

  // Predict one layer: events (src, pol, ts) -> per target neuron the time
  // of its + and - spike (-1: none), plus total spikes and drops.
  typedef struct { int src; int pol; int ts; } ev_t;
  typedef struct { int k; int m; bit sched; int alpha; int v; } lcfg_t;

  function automatic void predict(input ev_t evs[$], input bit second, input lcfg_t c,
                                  output int tplus [NIN], output int tminus [NIN],
                                  output int n_fire, output int n_drop);
    n_fire = 0; n_drop = 0;
    for (int j = 0; j < NIN; j++) begin
      int a1 [$], a2 [$];
      int tf1, tf2, dr1, dr2;
      foreach (evs[e]) begin
        int wp, wm, dp, dm;
        wp = second ? w2p[evs[e].src][j] : w1p[evs[e].src][j];
        wm = second ? w2m[evs[e].src][j] : w1m[evs[e].src][j];
        dp = second ? d3[wp] : d1[wp];
        dm = second ? d3[wm] : d1[wm];
        a1.push_back(evs[e].ts + (evs[e].pol ? dm : dp));
        a2.push_back(evs[e].ts + (evs[e].pol ? dp : dm));
      end
      ref_cbs(a1, c.k, longint'(c.m), tf1, dr1);
      ref_cbs(a2, c.k, longint'(c.m), tf2, dr2);
      n_fire += int'(tf1 >= 0) + int'(tf2 >= 0);
      n_drop += dr1 + dr2;
      tplus[j] = -1; tminus[j] = -1;
      if (!c.sched) begin
        tplus[j] = tf2; tminus[j] = tf1;
      end else if (tf1 >= 0 && tf2 >= 0) begin
        int tj, tl;
        tj = c.alpha * (tf2 - tf1); if (tj < 0) tj = 0; if (tj > c.v) tj = c.v;
        tl = (tf1 > tf2) ? tf1 : tf2;
        tplus[j]  = (c.v + tj > tl) ? c.v + tj : tl;
        tminus[j] = (c.v - tj > tl) ? c.v - tj : tl;
      end
    end
  endfunction

  // ------------------------------------------------------------- monitors ---
  ev_t in_obs [$];      // accepted external inputs (routed pool), stamped
  ev_t hid_obs [$];     // hidden spikes entering input port 1, stamped
  ev_t out_obs [$];     // spikes on the external output
  int  n_in_stall = 0, n_out_stall = 0, n_loop_stall = 0;
  bit  monitor_on = 0;

  always @(posedge clk) if (rst_n && !start && monitor_on) begin
    if (ext_in_valid && ext_in_ready && int'(ext_in_addr[LW-1:0]) < NIN)
      in_obs.push_back('{int'(ext_in_addr[LW-1:0]), int'(ext_in_pol), int'(now)});
    if (ext_in_valid && !ext_in_ready) n_in_stall++;
    if (dut.pout_valid[0] && dut.pout_ready[0])
      hid_obs.push_back('{int'(dut.pout_addr[0][LW-1:0]), int'(dut.pout_pol[0]), int'(now)});
    if (dut.pout_valid[0] && !dut.pout_ready[0]) n_loop_stall++;
    if (ext_out_valid && ext_out_ready)
      out_obs.push_back('{int'(ext_out_addr[LW-1:0]), int'(ext_out_pol), int'(now)});
    if (ext_out_valid && !ext_out_ready) n_out_stall++;
  end

  // Back-pressure on the external output.
  bit out_bp = 0;
  always @(negedge clk) ext_out_ready <= out_bp ? ($urandom_range(0, 2) == 0) : 1'b1;

  // -------------------------------------------------------- configuration ---
  task automatic wr(input bit lut, input int port, input int addr, input longint data);
    @(negedge clk);
    cfg_we = 1; cfg_lut = lut; cfg_port = PW'(port); cfg_addr = 24'(addr); cfg_data = C_W'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic lut_hdr(input int port, input int pool, input bit valid, input int dport, input int dpool);
    wr(1, port, (1 << 23) | (pool << (2 * HW)), (int'(valid) << (PW + 1)) | (dport << 1) | dpool);
  endtask

  task automatic lut_w(input int port, input int pool, input int src, input int dst, input int wp, input int wm);
    wr(1, port, (pool << (2 * HW)) | (src << HW) | dst, (wp << P) | wm);
  endtask

  task automatic eg_cfg(input int port, input lcfg_t c, input int tout);
    wr(0, port, int'(CFG_K) << 4, c.k);
    wr(0, port, int'(CFG_M) << 4, c.m);
    wr(0, port, int'(CFG_TOUT) << 4, tout);
    wr(0, port, int'(CFG_ALPHA) << 4, c.alpha);
    wr(0, port, int'(CFG_V) << 4, c.v);
    wr(0, port, int'(CFG_MODE) << 4, int'(c.sched));
  endtask

  // ------------------------------------------------------------ counting ---
  int m_fire = 0, m_cq_drop = 0, m_sq_drop = 0, m_tmo = 0, m_late = 0, m_unrouted = 0;
  int m_sched = 0, m_bypass = 0, m_spikes_out = 0;

  task automatic restart();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    in_obs.delete(); hid_obs.delete(); out_obs.delete();
  endtask

  task automatic send(input int src, input int pol);
    @(negedge clk);
    ext_in_valid = 1; ext_in_addr = {2'b00, LW'(src)}; ext_in_pol = 1'(pol);
    do @(posedge clk); while (!ext_in_ready);
    @(negedge clk);
    ext_in_valid = 0;
  endtask

  task automatic wait_until(input int t);
    while (int'(now) < t) @(negedge clk);
  endtask

  // Compare observed spikes of one layer with the prediction.
  task automatic compare(input string layer, input ev_t obs[$], input int tplus [NIN], input int tminus [NIN],
                         input int base, input int slack);
    int seen [NIN][2];
    for (int j = 0; j < NIN; j++) begin seen[j][0] = 0; seen[j][1] = 0; end
    foreach (obs[e]) begin
      int j, exp_t;
      j = obs[e].src - base;
      if (j < 0 || j >= NIN) begin check(0, $sformatf("%s: spike from neuron %0d outside the layer", layer, obs[e].src)); continue; end
      seen[j][obs[e].pol]++;
      exp_t = obs[e].pol ? tminus[j] : tplus[j];
      check(exp_t >= 0 && obs[e].ts >= exp_t && obs[e].ts <= exp_t + slack,
            $sformatf("%s neuron %0d pol %0d at %0d exp %0d", layer, j, obs[e].pol, obs[e].ts, exp_t));
    end
    for (int j = 0; j < NIN; j++) begin
      check(seen[j][0] == int'(tplus[j] >= 0) && seen[j][1] == int'(tminus[j] >= 0),
            $sformatf("%s neuron %0d spikes %0d/%0d exp %0d/%0d", layer, j, seen[j][0], seen[j][1],
                      tplus[j], tminus[j]));
    end
  endtask

  // One inference of the network with random inputs.
  task automatic inference(input lcfg_t c1, input lcfg_t c3, input int n_in, input int n_unr);
    int hp [NIN], hm [NIN], op [NIN], om [NIN];
    int f1, dr1, f3, dr3, t_end;
    eg_cfg(1, c1, 0);
    eg_cfg(3, c3, 0);
    restart();
    monitor_on = 1;
    for (int e = 0; e < n_in; e++) begin
      wait_until($urandom_range(0, 1) + int'(now));
      send($urandom_range(0, NIN - 1), $urandom_range(0, 1));
    end
    for (int e = 0; e < n_unr; e++) send(NIN + $urandom_range(0, NIN - 1), 0);
    predict(in_obs, 0, c1, hp, hm, f1, dr1);
    // wait for the last spike and for the last queued event to reach the
    // shared queue (its drop is counted there)
    t_end = int'(now) + 30;
    for (int j = 0; j < NIN; j++) begin
      if (hp[j] > t_end) t_end = hp[j];
      if (hm[j] > t_end) t_end = hm[j];
    end
    wait_until(t_end + 20);
    predict(hid_obs, 1, c3, op, om, f3, dr3);
    foreach (hid_obs[e]) if (hid_obs[e].ts + 30 > t_end) t_end = hid_obs[e].ts + 30;
    for (int j = 0; j < NIN; j++) begin
      if (op[j] > t_end) t_end = op[j];
      if (om[j] > t_end) t_end = om[j];
    end
    wait_until(t_end + 10);
    monitor_on = 0;
    compare("hidden", hid_obs, hp, hm, 0, 6);
    compare("output", out_obs, op, om, NIN, 3);
    check(int'(cnt_fire[0]) == f1 && int'(cnt_fire[2]) == f3,
          $sformatf("spike counters %0d/%0d exp %0d/%0d", cnt_fire[0], cnt_fire[2], f1, f3));
    check(int'(cnt_cq_drop[0]) == dr1 && int'(cnt_cq_drop[2]) == dr3,
          $sformatf("drop counters %0d/%0d exp %0d/%0d", cnt_cq_drop[0], cnt_cq_drop[2], dr1, dr3));
    check(int'(cnt_unrouted) == n_unr, $sformatf("unrouted %0d exp %0d", cnt_unrouted, n_unr));
    check(cnt_sq_drop[0] == 0 && cnt_tmo[0] == 0 && cnt_tmo[2] == 0, "no shaped drop or time-out");
    m_fire += f1 + f3; m_cq_drop += dr1 + dr3;
    m_late += int'(cnt_late[0]); m_unrouted += n_unr; m_spikes_out += out_obs.size();
    if (c1.sched) m_sched++; else m_bypass++;
  endtask

  // ----------------------------------------------------------------- main ---
  initial begin
    lcfg_t c1, c3;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // tables: port 0 pool 0 -> port 1 pool 0; port 1 pool 0 -> port 3 pool 1
    lut_hdr(0, 0, 1, 1, 0);
    lut_hdr(0, 1, 0, 0, 0);
    lut_hdr(1, 0, 1, 3, 1);
    for (int s = 0; s < NIN; s++)
      for (int d = 0; d < NIN; d++) begin
        w1p[s][d] = $urandom_range(0, 7); w1m[s][d] = $urandom_range(0, 7);
        w2p[s][d] = $urandom_range(0, 7); w2m[s][d] = $urandom_range(0, 7);
        lut_w(0, 0, s, d, w1p[s][d], w1m[s][d]);
        lut_w(1, 0, s, d, w2p[s][d], w2m[s][d]);
      end
    // delays long enough for every fan-out to arrive before its TET
    for (int q = 0; q < 8; q++) begin
      d1[q] = 12 + 2 * q; d3[q] = 12 + 2 * q;
      wr(0, 1, (int'(CFG_MAXTIME) << 4) | q, d1[q]);
      wr(0, 3, (int'(CFG_MAXTIME) << 4) | q, d3[q]);
    end

    for (int r = 0; r < 8; r++) begin
      c1 = '{k: $urandom_range(1, 4), m: $urandom_range(0, 20), sched: (r % 2 == 1),
             alpha: $urandom_range(1, 2), v: $urandom_range(30, 60)};
      c3 = '{k: $urandom_range(1, 6), m: $urandom_range(0, 30), sched: 0, alpha: 1, v: 0};
      out_bp = (r >= 4);
      inference(c1, c3, $urandom_range(3, 8), (r % 3 == 0) ? 2 : 0);
      $display("inference %0d: hidden mode %s, %0d inputs, %0d hidden spikes, %0d output spikes",
               r, c1.sched ? "sched " : "bypass", in_obs.size(), hid_obs.size(), out_obs.size());
    end
    out_bp = 0;

    // time-outs: the hidden layer cannot reach its threshold
    c1 = '{k: 2, m: 100000, sched: 1, alpha: 1, v: 40};
    eg_cfg(1, c1, 6);
    restart();
    monitor_on = 1;
    send(3, 0); send(7, 1);
    wait_until(80);
    monitor_on = 0;
    check(cnt_tmo[0] > 0 && cnt_fire[0] == 0 && hid_obs.size() == 0 && out_obs.size() == 0,
          $sformatf("time-outs %0d, no spikes", cnt_tmo[0]));
    m_tmo += int'(cnt_tmo[0]);

    // shaped-queue overflow: KMAX + 10 events from one input into queues of
    // depth KMAX (delay of PCP 7 made long so that nothing leaves early)
    wr(0, 1, (int'(CFG_MAXTIME) << 4) | 7, 3000);
    for (int d = 0; d < NIN; d++) lut_w(0, 0, 5, d, 7, 7);
    c1 = '{k: 2, m: 1000000, sched: 0, alpha: 1, v: 0};
    eg_cfg(1, c1, 0);
    restart();
    monitor_on = 1;
    for (int e = 0; e < KMAX + 10; e++) send(5, e % 2);
    repeat (40 * HP) @(negedge clk);
    monitor_on = 0;
    check(int'(cnt_sq_drop[0]) == 10 * 2 * NIN, $sformatf("shaped-queue drops %0d exp %0d", cnt_sq_drop[0], 10 * 2 * NIN));
    m_sq_drop += int'(cnt_sq_drop[0]);

    $display("mechanisms: spikes %0d (output %0d), shared-queue drops %0d, shaped-queue drops %0d, time-outs %0d",
             m_fire, m_spikes_out, m_cq_drop, m_sq_drop, m_tmo);
    $display("            late scheduled events %0d, unrouted %0d, bypass inferences %0d, scheduled inferences %0d",
             m_late, m_unrouted, m_bypass, m_sched);
    $display("            stalls: input %0d, loop-back %0d, output %0d", n_in_stall, n_loop_stall, n_out_stall);
    check(m_fire > 0 && m_spikes_out > 0 && m_cq_drop > 0 && m_sq_drop > 0 && m_tmo > 0 && m_unrouted > 0 &&
          m_bypass > 0 && m_sched > 0 && n_out_stall > 0 && n_in_stall > 0, "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
