// pi2_neuron: one differential pi2 neuron together with its input synapses.
//
// Every synaptic event carries the polarity of the presynaptic spike (0: T+,
// 1: T-) and the synapse's two delay codes W+ and W-.  Following Eq. 7-8 of
// the paper, the event is steered to two shaped-queue sets at once:
//
//     H1 (computes T~+):  T+ event with W+,  T- event with W-
//     H2 (computes T~-):  T+ event with W-,  T- event with W+
//
// Each set is a pi2-ATS synapse block (2^P queues, TET = T_i + delay) feeding
// a pi2-CBS shared queue that fires at M/K + mean of its K earliest arrivals.
// The two spike times go to the differential scheduler, which emits the
// neuron's output events (see pi2_diff_sched).
//
// Interface: syn_valid with syn_pol, syn_wp, syn_wm, syn_ts (arrival time);
// output events on ev_valid/ev_pol/ev_ready.  Status pulses report drops in
// the shaped queues (sq_drop), in the shared queues (cq_drop), spikes of the
// CBS gates (fire), time-outs (tmo) and late scheduled events (late).
// Timing: an event enters the shaped queues the cycle after syn_valid; the
// rest follows from the ATS and CBS blocks.  The steering is the paper's; the
// packaging of both queue sets into one module is this design's.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
module pi2_neuron
  import pi2_pkg::*;
#(
  parameter int unsigned P    = P_BITS,
  parameter int unsigned KMAX = KMAX_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  time_t       now,
  input  logic        tick,
  input  neuron_cfg_t cfg,
  input  time_t       max_time [2**P],
  input  logic        syn_valid,
  input  logic        syn_pol,
  input  logic [P-1:0] syn_wp,
  input  logic [P-1:0] syn_wm,
  input  time_t       syn_ts,
  output logic        ev_valid,
  output logic        ev_pol,
  input  logic        ev_ready,
  output logic [1:0]  sq_drop,
  output logic [1:0]  cq_drop,
  output logic [1:0]  fire,
  output logic [1:0]  tmo,
  output logic        late
);

  // index 0: H1 (T~+), index 1: H2 (T~-)
  logic [P-1:0] pcp [2];
  assign pcp[0] = syn_pol ? syn_wm : syn_wp;
  assign pcp[1] = syn_pol ? syn_wp : syn_wm;

  logic  rel_valid [2];
  time_t rel_tet   [2];
  time_t fire_time [2];
  kval_t   qlen   [2];
  credit_t credit [2];

  for (genvar h = 0; h < 2; h++) begin : g_half
    pi2_ats_synapse #(.P(P), .DEPTH(KMAX)) u_ats (
      .clk, .rst_n, .start, .now, .hold(tick),
      .in_valid (syn_valid),
      .in_pcp   (pcp[h]),
      .in_ts    (syn_ts),
      .max_time (max_time),
      .rel_valid(rel_valid[h]),
      .rel_tet  (rel_tet[h]),
      .drop     (sq_drop[h])
    );

    pi2_cbs_neuron u_cbs (
      .clk, .rst_n, .start, .now, .tick,
      .k        (cfg.k),
      .m_thr    (cfg.m_thr),
      .t_out    (cfg.t_out),
      .rel_valid(rel_valid[h]),
      .rel_tet  (rel_tet[h]),
      .fire     (fire[h]),
      .fire_time(fire_time[h]),
      .tmo      (tmo[h]),
      .drop     (cq_drop[h]),
      .qlen     (qlen[h]),
      .credit   (credit[h])
    );

    // The shared queue never exceeds KMAX, and a spike leaves it with no credit.
    a_qlen:   assert property (@(posedge clk) disable iff (!rst_n) qlen[h] <= kval_t'(KMAX));
    a_credit: assert property (@(posedge clk) disable iff (!rst_n) fire[h] |-> credit[h] == '0);
  end

  pi2_diff_sched u_sched (
    .clk, .rst_n, .start, .now,
    .sched_en(cfg.sched_en),
    .alpha   (cfg.alpha),
    .v_off   (cfg.v_off),
    .fire_p  (fire[0]),
    .t_p     (fire_time[0]),
    .tmo_p   (tmo[0]),
    .fire_m  (fire[1]),
    .t_m     (fire_time[1]),
    .tmo_m   (tmo[1]),
    .ev_valid,
    .ev_pol,
    .ev_ready,
    .late
  );

endmodule
