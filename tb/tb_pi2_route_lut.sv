// tb_pi2_route_lut: self-checking test of the pool-to-pool routing lookup.
//
// The table is loaded with random pool headers (valid, destination port,
// destination pool) and random W+/W- delay codes for every source/target
// neuron pair.  Random spike events then enter with random back-pressure on
// the synaptic output.  Checks: an event from a valid pool fans out to all HP
// neurons of the destination pool, in order, each with the destination port,
// the local neuron index dpool*HP + j, the event's polarity and time stamp
// and the weights stored for (source, j); an event from an invalid pool
// pulses `unrouted` and produces nothing; the input is refused while a
// fan-out is in progress.
module tb_pi2_route_lut;
  import pi2_pkg::*;
  localparam int H = 4, M = 32, HP = 8, P = 3;
  localparam int NPOOL = M / HP, PLW = $clog2(NPOOL), HW = $clog2(HP), LW = $clog2(M), PW = $clog2(H);

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic            ev_valid = 0, ev_ready, ev_pol = 0;
  logic [PW+LW-1:0] ev_addr = 0;
  time_t           ev_ts = 0;
  logic            syn_valid, syn_ready = 0, syn_pol, unrouted;
  logic [PW-1:0]   syn_dport;
  logic [LW-1:0]   syn_dlocal;
  logic [P-1:0]    syn_wp, syn_wm;
  time_t           syn_ts;
  logic            cfg_we = 0, cfg_hdr = 0;
  logic [PLW-1:0]  cfg_pool = 0;
  logic [HW-1:0]   cfg_src = 0, cfg_dst = 0;
  logic [31:0]     cfg_data = 0;

  pi2_route_lut #(.H(H), .M(M), .HP(HP), .P(P)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // table model
  bit       t_valid [NPOOL];
  int       t_dport [NPOOL], t_dpool [NPOOL];
  int       t_w [NPOOL][HP][HP];

  // expected synaptic events
  typedef struct { int dport, dlocal, pol, wp, wm; time_t ts; } syn_t;
  syn_t exp_q [$];
  int n_syn = 0, n_unrouted = 0, exp_unrouted = 0;
  bit took = 0;

  always @(posedge clk) if (rst_n && !start) begin
    took = ev_valid && ev_ready;
    if (took) begin
      int lp, pool, src;
      lp = int'(ev_addr[LW-1:0]);
      pool = lp / HP; src = lp % HP;
      if (t_valid[pool]) begin
        for (int j = 0; j < HP; j++) begin
          syn_t e;
          e.dport = t_dport[pool]; e.dlocal = t_dpool[pool] * HP + j; e.pol = int'(ev_pol);
          e.wp = t_w[pool][src][j] >> P; e.wm = t_w[pool][src][j] & ((1 << P) - 1); e.ts = ev_ts;
          exp_q.push_back(e);
        end
      end else exp_unrouted++;
    end
    if (unrouted) n_unrouted++;
    if (syn_valid && syn_ready) begin
      n_syn++;
      if (exp_q.size() == 0) check(0, "unexpected synaptic event");
      else begin
        syn_t e;
        e = exp_q.pop_front();
        check(int'(syn_dport) == e.dport && int'(syn_dlocal) == e.dlocal && int'(syn_pol) == e.pol &&
              int'(syn_wp) == e.wp && int'(syn_wm) == e.wm && syn_ts == e.ts,
              $sformatf("syn event: port %0d local %0d w %0d/%0d exp port %0d local %0d w %0d/%0d",
                        syn_dport, syn_dlocal, syn_wp, syn_wm, e.dport, e.dlocal, e.wp, e.wm));
      end
    end
    if (syn_valid) check(!ev_ready, "input refused during fan-out");
  end

  task automatic cfg_write(input bit hdr, input int pool, input int src, input int dst, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_hdr = hdr; cfg_pool = PLW'(pool); cfg_src = HW'(src); cfg_dst = HW'(dst);
    cfg_data = 32'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NPOOL; p++) begin
      t_valid[p] = (p != 1) ? ($urandom_range(0, 4) != 0) : 1'b0;   // pool 1 always unrouted
      t_dport[p] = $urandom_range(0, H - 1);
      t_dpool[p] = $urandom_range(0, NPOOL - 1);
      cfg_write(1, p, 0, 0, (int'(t_valid[p]) << (PW + PLW)) | (t_dport[p] << PLW) | t_dpool[p]);
      for (int s = 0; s < HP; s++)
        for (int d = 0; d < HP; d++) begin
          t_w[p][s][d] = $urandom_range(0, (1 << (2 * P)) - 1);
          cfg_write(0, p, s, d, t_w[p][s][d]);
        end
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (!ev_valid || took) begin
        ev_valid = ($urandom_range(0, 2) == 0);
        ev_addr  = (PW+LW)'($urandom);
        ev_pol   = 1'($urandom);
        ev_ts    = time_t'(i);
      end
      syn_ready = ($urandom_range(0, 3) != 0);
    end
    @(negedge clk); ev_valid = 0; syn_ready = 1;
    repeat (50) @(negedge clk);
    check(exp_q.size() == 0, "all fan-outs completed");
    check(n_unrouted == exp_unrouted && n_unrouted > 0, $sformatf("unrouted %0d exp %0d", n_unrouted, exp_unrouted));
    check(n_syn > 500, "traffic flowed");
    $display("synaptic events %0d unrouted %0d", n_syn, n_unrouted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
