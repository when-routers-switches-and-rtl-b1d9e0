// tb_pi2_xor: the 2 x 10 x 2 differential XOR network run on the pi2 switch
// at its default size (no parameter override).
//
// The network has 2 input neurons (port 0, pool 0), 10 hidden neurons
// (egress port 1, pool 0) and 2 output neurons (egress port 3, pool 1, the
// external output); hidden spikes loop back through input port 1.  The
// layer-wise K is run in both settings of the XOR example, K = [2, 3] and
// K = [1, 1].  Each sample (x0, x1) is drawn uniformly from [-1, 1]^2 with
// the XOR label of the signs, and each input value x is sent as a
// differential pair of events, + at 8 + round(4x) and - at 8 - round(4x)
// time units (this test's encoding).  The trained delays of the example are
// not available, so the synaptic delay codes are random (PCP 0..6); the
// unused neurons of the 16-neuron pools get PCP 7, whose delay is longer
// than an inference, so they stay silent.
//
// Checking: the same independent reference model as the switch test
// (Eq. 7-8 steering, TET = stamp + delay, earliest-K credit gate with
// threshold M, Eq. 9-10 output scheduling) predicts every hidden spike from
// the stamped inputs and every output spike from the stamped loop-back
// events; each must appear once within a few time units of its predicted
// time.  The predicted class (the output neuron with the larger
// T- minus T+ difference) is printed with the agreement to the label, which
// with untrained delays is only informative.
module tb_pi2_xor;
  import pi2_pkg::*;

  localparam int H = 4, M = 32, HP = 16, P = 3, KMAX = 140, TICK_DIV = 64;
  localparam int LW = 5, PW = 2, AW = 7, HW = 4;
  localparam int NIN = 16;                 // pool size
  localparam int NI = 2, NH = 10, NO = 2;  // network sizes
  localparam int NSAMPLE = 12;             // samples per K setting

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
    repeat (8000000) @(posedge clk);
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

  // One sample: returns the predicted class, -1 if no output neuron spiked.
  task automatic sample(input lcfg_t c1, input lcfg_t c3, input int x0, input int x1, output int cls);
    int hp [NIN], hm [NIN], op [NIN], om [NIN];
    int f1, dr1, f3, dr3, t_end, best;
    int tx [4], sx [4], px [4];
    restart();
    monitor_on = 1;
    // differential input events, sent in time order
    tx[0] = 8 + x0; sx[0] = 0; px[0] = 0;
    tx[1] = 8 - x0; sx[1] = 0; px[1] = 1;
    tx[2] = 8 + x1; sx[2] = 1; px[2] = 0;
    tx[3] = 8 - x1; sx[3] = 1; px[3] = 1;
    for (int t = 0; t <= 16; t++)
      for (int e = 0; e < 4; e++)
        if (tx[e] == t) begin wait_until(t); send(sx[e], px[e]); end
    predict(in_obs, 0, c1, hp, hm, f1, dr1);
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
    for (int j = NH; j < NIN; j++) check(hp[j] < 0 && hm[j] < 0, "unused hidden neuron silent");
    cls = -1; best = 0;
    for (int j = 0; j < NO; j++)
      if (op[j] >= 0 && om[j] >= 0 && (cls < 0 || op[j] - om[j] > best)) begin cls = j; best = op[j] - om[j]; end
  endtask

  // ----------------------------------------------------------------- main ---
  initial begin
    lcfg_t c1, c3;
    int agree, answered;
    repeat (3) @(negedge clk);
    rst_n = 1;
    lut_hdr(0, 0, 1, 1, 0);
    lut_hdr(0, 1, 0, 0, 0);
    lut_hdr(1, 0, 1, 3, 1);
    for (int s = 0; s < NIN; s++)
      for (int d = 0; d < NIN; d++) begin
        bit l1, l2;
        l1 = (s < NI && d < NH);
        l2 = (s < NH && d < NO);
        w1p[s][d] = l1 ? $urandom_range(0, 6) : 7; w1m[s][d] = l1 ? $urandom_range(0, 6) : 7;
        w2p[s][d] = l2 ? $urandom_range(0, 6) : 7; w2m[s][d] = l2 ? $urandom_range(0, 6) : 7;
        lut_w(0, 0, s, d, w1p[s][d], w1m[s][d]);
        lut_w(1, 0, s, d, w2p[s][d], w2m[s][d]);
      end
    for (int q = 0; q < 8; q++) begin
      d1[q] = (q == 7) ? 100000 : 12 + 2 * q; d3[q] = d1[q];
      wr(0, 1, (int'(CFG_MAXTIME) << 4) | q, d1[q]);
      wr(0, 3, (int'(CFG_MAXTIME) << 4) | q, d3[q]);
    end

    for (int ks = 0; ks < 2; ks++) begin
      c1 = '{k: ks ? 1 : 2, m: ks ? 0 : 2, sched: 1, alpha: 1, v: 40};
      c3 = '{k: ks ? 1 : 3, m: ks ? 0 : 3, sched: 0, alpha: 1, v: 0};
      eg_cfg(1, c1, 0);
      eg_cfg(3, c3, 0);
      agree = 0; answered = 0;
      for (int n = 0; n < NSAMPLE; n++) begin
        int x0, x1, label, cls;
        x0 = $urandom_range(0, 8) - 4; x1 = $urandom_range(0, 8) - 4;
        if (x0 == 0) x0 = 1;
        if (x1 == 0) x1 = -1;
        label = ((x0 < 0) != (x1 < 0)) ? 1 : 0;
        sample(c1, c3, x0, x1, cls);
        if (cls >= 0) answered++;
        if (cls == label) agree++;
      end
      $display("K = [%0d, %0d]: %0d samples, %0d with an output, %0d agree with the XOR label (untrained delays)",
               c1.k, c3.k, NSAMPLE, answered, agree);
      check(answered > 0, "the output layer answered");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
