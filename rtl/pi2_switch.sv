// pi2_switch: a processing-in-interconnect (pi2) neuromorphic core built as
// a packet switch.
//
// The switch has H input and H output ports.  M neurons share each port and
// are addressed as {port, pool, index} (log2(H*M) bits) plus a polarity bit.
//   * Input port 0 carries the external input events (the M input neurons are
//     pure transmitters); output port H-1 carries the output neurons' events
//     to the outside.  Output ports 1..H-2 are looped back to the input port
//     of the same number, standing in for the physical channel through which
//     an intermediate neuron's spike becomes the next Tx event.
//   * Each of input ports 0..H-2 has ingress processing (time stamp, packet
//     buffer) and its own routing table (parallel lookups), which fans every
//     Tx event out to the HP neurons of one destination pool with their
//     synaptic delays as PCP codes.
//   * Traffic classification (a crossbar) delivers each synaptic event to the
//     egress pipeline of its destination port.
//   * Each of output ports 1..H-1 has an egress pipeline of M differential
//     pi2 neurons: ATS shaped queues delay and sort (synapse), pi2-CBS
//     shared queues add and threshold (neuron), full queues drop
//     (non-linearity), and transmission selection puts their spikes on the
//     port.
// All ports use valid/ready handshakes.  `start` begins an inference: system
// time returns to 0 and all queues and neuron states are cleared (tables and
// configuration are kept).  The system time advances every TICK_DIV cycles;
// one time unit must be long enough to fan out the Tx events of one unit
// (HP cycles each), so the default is 64 cycles.
//
// Configuration: cfg_we with cfg_lut = 1 writes the routing table of input
// port cfg_port, cfg_addr = {hdr, pool, src, dst} packed as
// {cfg_addr[23], pool at [2*HW +: PLW], src at [HW +: HW], dst at [0 +: HW]}
// (HW = log2 HP); cfg_lut = 0 writes the egress registers of output port
// cfg_port at cfg_addr[7:0] (map in pi2_pkg).
//
// Follows the paper's Fig. 8A: ingress, parallel lookups, traffic
// classification, H_out egress pipelines of m synapse/neuron pairs with
// transmission selection, and the recursive routing of output events.  This
// design's own choices: sizes (see parameters), loop-back inside the core,
// on-chip tables without external memory or cache, address events instead of
// Ethernet frames.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
// Lint note: cfg_addr bits between the packed table fields and bit 23 are
// unused at the default sizes; they carry wider fields for larger HP or M.
// Note on synthesis: the two port bits of ext_out_addr are the constant H-1
// (every external output event comes from output port H-1); they are kept so
// that the address has the same {port, local} form on every port.
module pi2_switch
  import pi2_pkg::*;
#(
  parameter int unsigned H        = 4,
  parameter int unsigned M        = 32,
  parameter int unsigned HP       = 16,
  parameter int unsigned P        = P_BITS,
  parameter int unsigned KMAX     = KMAX_DEF,
  parameter int unsigned TICK_DIV = 64,
  parameter int unsigned IN_DEPTH = 16,
  localparam int unsigned AW      = $clog2(H) + $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output time_t         now,
  // external input port (input port 0)
  input  logic          ext_in_valid,
  output logic          ext_in_ready,
  input  logic [AW-1:0] ext_in_addr,
  input  logic          ext_in_pol,
  // external output port (output port H-1)
  output logic          ext_out_valid,
  input  logic          ext_out_ready,
  output logic [AW-1:0] ext_out_addr,
  output logic          ext_out_pol,
  // configuration
  input  logic                 cfg_we,
  input  logic                 cfg_lut,
  input  logic [$clog2(H)-1:0] cfg_port,
  input  logic [23:0]          cfg_addr,
  input  logic [C_W-1:0]       cfg_data,
  // status, one entry per egress port 1..H-1 (index e-1)
  output logic [15:0]   cnt_sq_drop [H-1],
  output logic [15:0]   cnt_cq_drop [H-1],
  output logic [15:0]   cnt_fire    [H-1],
  output logic [15:0]   cnt_tmo     [H-1],
  output logic [15:0]   cnt_late    [H-1],
  output logic [15:0]   cnt_unrouted
);

  localparam int unsigned PORT_W = $clog2(H);
  localparam int unsigned LW     = $clog2(M);
  localparam int unsigned HW     = $clog2(HP);
  localparam int unsigned NPOOL  = M / HP;
  localparam int unsigned PLW    = (NPOOL > 1) ? $clog2(NPOOL) : 1;
  localparam int unsigned NI     = H - 1;   // input ports with ingress: 0..H-2
  localparam int unsigned NE     = H - 1;   // egress ports: 1..H-1
  localparam int unsigned EW     = $clog2(NE);
  // synaptic event payload: {dlocal, pol, wp, wm, ts}
  localparam int unsigned SDW    = LW + 1 + 2*P + T_W;

  logic tick;
  pi2_timebase #(.TICK_DIV(TICK_DIV)) u_time (.clk, .rst_n, .start, .now, .tick);

  // ---- input side ----------------------------------------------------------
  logic [NI-1:0] pin_valid, pin_ready, pin_pol;
  logic [AW-1:0] pin_addr [NI];

  // ---- output side ---------------------------------------------------------
  logic [NE-1:0] pout_valid, pout_ready, pout_pol;
  logic [AW-1:0] pout_addr [NE];

  // Port 0 is the external input; ports 1..H-2 are looped back.
  always_comb begin
    pin_valid[0] = ext_in_valid;
    pin_addr[0]  = ext_in_addr;
    pin_pol[0]   = ext_in_pol;
    ext_in_ready = pin_ready[0];
    for (int p = 1; p < NI; p++) begin
      pin_valid[p]    = pout_valid[p-1];
      pin_addr[p]     = pout_addr[p-1];
      pin_pol[p]      = pout_pol[p-1];
      pout_ready[p-1] = pin_ready[p];
    end
    ext_out_valid      = pout_valid[NE-1];
    ext_out_addr       = pout_addr[NE-1];
    ext_out_pol        = pout_pol[NE-1];
    pout_ready[NE-1]   = ext_out_ready;
  end

  // ---- ingress and routing lookup per input port ---------------------------
  logic [NI-1:0]     lk_valid, lk_ready, lk_pol, unrouted;
  logic [AW-1:0]     lk_addr [NI];
  time_t             lk_ts   [NI];
  logic [NI-1:0]     syn_valid, syn_ready;
  logic [PORT_W-1:0] syn_dport [NI];
  logic [EW-1:0]     syn_dest  [NI];
  logic [SDW-1:0]    syn_data  [NI];
  logic [NI-1:0]     syn_route_ok;

  for (genvar p = 0; p < NI; p++) begin : g_in
    logic [LW-1:0] s_dlocal;
    logic          s_pol;
    logic [P-1:0]  s_wp, s_wm;
    time_t         s_ts;
    logic          s_valid;

    pi2_ingress #(.AW(AW), .DEPTH(IN_DEPTH)) u_ingress (
      .clk, .rst_n, .start, .now,
      .in_valid (pin_valid[p]),
      .in_ready (pin_ready[p]),
      .in_addr  (pin_addr[p]),
      .in_pol   (pin_pol[p]),
      .out_valid(lk_valid[p]),
      .out_ready(lk_ready[p]),
      .out_addr (lk_addr[p]),
      .out_pol  (lk_pol[p]),
      .out_ts   (lk_ts[p])
    );

    pi2_route_lut #(.H(H), .M(M), .HP(HP), .P(P)) u_lut (
      .clk, .rst_n, .start,
      .ev_valid  (lk_valid[p]),
      .ev_ready  (lk_ready[p]),
      .ev_addr   (lk_addr[p]),
      .ev_pol    (lk_pol[p]),
      .ev_ts     (lk_ts[p]),
      .syn_valid (s_valid),
      .syn_ready (syn_ready[p] || !syn_route_ok[p]),
      .syn_dport (syn_dport[p]),
      .syn_dlocal(s_dlocal),
      .syn_pol   (s_pol),
      .syn_wp    (s_wp),
      .syn_wm    (s_wm),
      .syn_ts    (s_ts),
      .unrouted  (unrouted[p]),
      .cfg_we    (cfg_we && cfg_lut && (cfg_port == PORT_W'(p))),
      .cfg_hdr   (cfg_addr[23]),
      .cfg_pool  (cfg_addr[2*HW +: PLW]),
      .cfg_src   (cfg_addr[HW +: HW]),
      .cfg_dst   (cfg_addr[0 +: HW]),
      .cfg_data  (cfg_data[31:0])
    );

    // Output port 0 has no neurons: a table entry pointing there is void and
    // its events are discarded.
    assign syn_route_ok[p] = (syn_dport[p] != '0);
    assign syn_valid[p]    = s_valid && syn_route_ok[p];
    assign syn_dest[p]     = EW'(syn_dport[p] - 1'b1);
    assign syn_data[p]     = {s_dlocal, s_pol, s_wp, s_wm, s_ts};
  end

  // ---- traffic classification and scheduling -------------------------------
  logic [NE-1:0]  eg_valid;
  logic [SDW-1:0] eg_data [NE];

  pi2_xbar #(.NS(NI), .ND(NE), .DW(SDW)) u_xbar (
    .clk, .rst_n,
    .s_valid(syn_valid),
    .s_dest (syn_dest),
    .s_data (syn_data),
    .s_ready(syn_ready),
    .d_valid(eg_valid),
    .d_data (eg_data)
  );

  // ---- egress pipelines ------------------------------------------------------
  for (genvar e = 0; e < NE; e++) begin : g_eg
    logic [LW-1:0] d_dlocal;
    logic          d_pol;
    logic [P-1:0]  d_wp, d_wm;
    time_t         d_ts;
    assign {d_dlocal, d_pol, d_wp, d_wm, d_ts} = eg_data[e];

    pi2_egress #(.M(M), .P(P), .KMAX(KMAX), .PORT_W(PORT_W), .PORT_ID(e + 1)) u_egress (
      .clk, .rst_n, .start, .now, .tick,
      .cfg_we     (cfg_we && !cfg_lut && (cfg_port == PORT_W'(e + 1))),
      .cfg_addr   (cfg_addr[7:0]),
      .cfg_data   (cfg_data),
      .syn_valid  (eg_valid[e]),
      .syn_dlocal (d_dlocal),
      .syn_pol    (d_pol),
      .syn_wp     (d_wp),
      .syn_wm     (d_wm),
      .syn_ts     (d_ts),
      .out_valid  (pout_valid[e]),
      .out_addr   (pout_addr[e]),
      .out_pol    (pout_pol[e]),
      .out_ready  (pout_ready[e]),
      .cnt_sq_drop(cnt_sq_drop[e]),
      .cnt_cq_drop(cnt_cq_drop[e]),
      .cnt_fire   (cnt_fire[e]),
      .cnt_tmo    (cnt_tmo[e]),
      .cnt_late   (cnt_late[e])
    );
  end

  // ---- unrouted-event counter ------------------------------------------------
  logic [$clog2(NI+1)-1:0] n_unrouted;
  always_comb begin
    n_unrouted = '0;
    for (int p = 0; p < NI; p++) n_unrouted = n_unrouted + $bits(n_unrouted)'(unrouted[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         cnt_unrouted <= '0;
    else if (start)                     cnt_unrouted <= '0;
    else if (cnt_unrouted != 16'hFFFF)  cnt_unrouted <= cnt_unrouted + 16'(n_unrouted);
  end

endmodule
