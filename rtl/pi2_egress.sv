// pi2_egress: the egress pipeline of one output port of the pi2 switch.
//
// M neurons share the port (the paper's m).  A synaptic event arriving from
// traffic classification (syn_valid, destination neuron syn_dlocal, polarity,
// delay codes W+/W-, arrival time) is handed to that neuron's ATS shaped
// queues.  Fired output events of all neurons are merged by transmission
// selection and leave the port as address events {PORT_ID, local index} with
// their polarity on out_valid/out_ready.
//
// The port's neurons share one set of run-time parameters, written through
// cfg_we/cfg_addr/cfg_data (register map in pi2_pkg::cfg_reg_e; for
// CFG_MAXTIME the low P address bits select the PCP queue).  Reset values:
// K = KMAX, M = 0, no time-out, alpha = 1, V = 0, raw (bypass) mode and
// max_time[q] = q time units.
//
// Status counters (16 bit, saturating, cleared by `start`) count events
// dropped by full shaped queues, events dropped at the shared queues (queue
// full, time-out or after the gate fired), CBS gate openings, time-outs and
// late scheduled events.  Events never back-pressure the crossbar: a neuron
// that cannot take an event drops it, as the paper's queues do.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
// Lint note: cfg_addr[3] is unused with P = 3 (queue numbers need P bits).
// Note on synthesis: the port bits of out_addr are the constant PORT_ID;
// they are kept so that addresses have the same {port, local} form on every
// port.
module pi2_egress
  import pi2_pkg::*;
#(
  parameter int unsigned M       = 32,
  parameter int unsigned P       = P_BITS,
  parameter int unsigned KMAX    = KMAX_DEF,
  parameter int unsigned PORT_W  = 2,
  parameter int unsigned PORT_ID = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  time_t                 now,
  input  logic                  tick,
  // configuration
  input  logic                  cfg_we,
  input  logic [7:0]            cfg_addr,
  input  logic [C_W-1:0]        cfg_data,
  // synaptic events from traffic classification
  input  logic                  syn_valid,
  input  logic [$clog2(M)-1:0]  syn_dlocal,
  input  logic                  syn_pol,
  input  logic [P-1:0]          syn_wp,
  input  logic [P-1:0]          syn_wm,
  input  time_t                 syn_ts,
  // output port
  output logic                  out_valid,
  output logic [PORT_W+$clog2(M)-1:0] out_addr,
  output logic                  out_pol,
  input  logic                  out_ready,
  // status counters
  output logic [15:0]           cnt_sq_drop,
  output logic [15:0]           cnt_cq_drop,
  output logic [15:0]           cnt_fire,
  output logic [15:0]           cnt_tmo,
  output logic [15:0]           cnt_late
);

  localparam int unsigned LW = $clog2(M);
  localparam int unsigned NQ = 2**P;

  neuron_cfg_t cfg;
  time_t       max_time [NQ];

  cfg_reg_e reg_sel;
  assign reg_sel = cfg_reg_e'(cfg_addr[7:4]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.k        <= kval_t'(KMAX);
      cfg.m_thr    <= '0;
      cfg.t_out    <= '0;
      cfg.alpha    <= 8'd1;
      cfg.v_off    <= '0;
      cfg.sched_en <= 1'b0;
      for (int q = 0; q < NQ; q++) max_time[q] <= time_t'(q);
    end else if (cfg_we) begin
      case (reg_sel)
        CFG_K:       cfg.k        <= (cfg_data[K_W-1:0] > kval_t'(KMAX)) ? kval_t'(KMAX) : cfg_data[K_W-1:0];
        CFG_M:       cfg.m_thr    <= cfg_data;
        CFG_TOUT:    cfg.t_out    <= cfg_data[T_W-1:0];
        CFG_ALPHA:   cfg.alpha    <= cfg_data[7:0];
        CFG_V:       cfg.v_off    <= cfg_data[T_W-1:0];
        CFG_MODE:    cfg.sched_en <= cfg_data[0];
        CFG_MAXTIME: max_time[cfg_addr[P-1:0]] <= cfg_data[T_W-1:0];
        default: ;
      endcase
    end
  end

  logic [M-1:0] req, req_pol, gnt;
  logic [1:0]   sq_drop [M];
  logic [1:0]   cq_drop [M];
  logic [1:0]   fire    [M];
  logic [1:0]   tmo     [M];
  logic [M-1:0] late;

  for (genvar i = 0; i < M; i++) begin : g_neuron
    pi2_neuron #(.P(P), .KMAX(KMAX)) u_neuron (
      .clk, .rst_n, .start, .now, .tick,
      .cfg,
      .max_time,
      .syn_valid(syn_valid && (syn_dlocal == LW'(i))),
      .syn_pol,
      .syn_wp,
      .syn_wm,
      .syn_ts,
      .ev_valid (req[i]),
      .ev_pol   (req_pol[i]),
      .ev_ready (gnt[i]),
      .sq_drop  (sq_drop[i]),
      .cq_drop  (cq_drop[i]),
      .fire     (fire[i]),
      .tmo      (tmo[i]),
      .late     (late[i])
    );
  end

  logic [LW-1:0] out_idx;
  pi2_tx_select #(.N(M)) u_txsel (
    .clk, .rst_n,
    .req, .req_pol, .gnt,
    .out_valid,
    .out_idx,
    .out_pol,
    .out_ready
  );
  assign out_addr = {PORT_W'(PORT_ID), out_idx};

  // Per-cycle event counts for the status counters.
  logic [$clog2(2*M+1)-1:0] n_sq, n_cq, n_fire, n_tmo, n_late;
  always_comb begin
    n_sq = '0; n_cq = '0; n_fire = '0; n_tmo = '0; n_late = '0;
    for (int i = 0; i < M; i++) begin
      n_sq   = n_sq   + $bits(n_sq)'(sq_drop[i][0]) + $bits(n_sq)'(sq_drop[i][1]);
      n_cq   = n_cq   + $bits(n_cq)'(cq_drop[i][0]) + $bits(n_cq)'(cq_drop[i][1]);
      n_fire = n_fire + $bits(n_fire)'(fire[i][0]) + $bits(n_fire)'(fire[i][1]);
      n_tmo  = n_tmo  + $bits(n_tmo)'(tmo[i][0]) + $bits(n_tmo)'(tmo[i][1]);
      n_late = n_late + $bits(n_late)'(late[i]);
    end
  end

  function automatic logic [15:0] sat_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[16] ? 16'hFFFF : s[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_sq_drop <= '0; cnt_cq_drop <= '0; cnt_fire <= '0; cnt_tmo <= '0; cnt_late <= '0;
    end else if (start) begin
      cnt_sq_drop <= '0; cnt_cq_drop <= '0; cnt_fire <= '0; cnt_tmo <= '0; cnt_late <= '0;
    end else begin
      cnt_sq_drop <= sat_add(cnt_sq_drop, 16'(n_sq));
      cnt_cq_drop <= sat_add(cnt_cq_drop, 16'(n_cq));
      cnt_fire    <= sat_add(cnt_fire,    16'(n_fire));
      cnt_tmo     <= sat_add(cnt_tmo,     16'(n_tmo));
      cnt_late    <= sat_add(cnt_late,    16'(n_late));
    end
  end

endmodule
