// pi2_route_lut: routing look-up ("switching logic, parallel lookups") of one
// input port.
//
// The M neurons behind a port are grouped into M/HP pools of HP neurons, and a
// pool is fully connected to exactly one destination pool.  The table of a
// port therefore holds, per source pool, a header {valid, destination port,
// destination pool} and an HP x HP array of synaptic delays, each a pair of
// P-bit PCP codes (W+, W-) for the differential weights.  A Tx event
// (address {port, pool, index}, polarity, arrival time) is fanned out into HP
// synaptic events, one per neuron j of the destination pool, each carrying
// {destination port, local neuron address, polarity, W+[i][j], W-[i][j],
// arrival time}.  One synaptic event leaves per cycle under syn_valid/
// syn_ready; the next Tx event is taken (ev_ready) once the last one of a
// fan-out has gone.  A Tx event whose pool has no valid header is discarded
// with an `unrouted` pulse.
//
// Table writes: cfg_we with cfg_hdr = 1 writes the header of cfg_pool from
// cfg_data = {valid, dport, dpool}; cfg_hdr = 0 writes the delay pair of
// (cfg_pool, source cfg_src, destination cfg_dst) from cfg_data = {W+, W-}.
//
// Follows the paper: the pool-to-pool table and its contents (Supp. "Memory
// requirements").  This design's choices: two delays per synapse, one read
// per cycle, the write port, and a single-level table (the paper's
// hierarchical multi-level lookup is not modelled).
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
// Lint note: the port bits of ev_addr are unused: the table is per input
// port, so only the local part (pool, index) is looked up.
module pi2_route_lut
  import pi2_pkg::*;
#(
  parameter int unsigned H  = 4,
  parameter int unsigned M  = 32,
  parameter int unsigned HP = 16,
  parameter int unsigned P  = P_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  // Tx event from ingress
  input  logic                  ev_valid,
  output logic                  ev_ready,
  input  logic [$clog2(H)+$clog2(M)-1:0] ev_addr,
  input  logic                  ev_pol,
  input  time_t                 ev_ts,
  // synaptic event out
  output logic                  syn_valid,
  input  logic                  syn_ready,
  output logic [$clog2(H)-1:0]  syn_dport,
  output logic [$clog2(M)-1:0]  syn_dlocal,
  output logic                  syn_pol,
  output logic [P-1:0]          syn_wp,
  output logic [P-1:0]          syn_wm,
  output time_t                 syn_ts,
  output logic                  unrouted,
  // table write port
  input  logic                  cfg_we,
  input  logic                  cfg_hdr,
  input  logic [((M/HP) > 1 ? $clog2(M/HP) : 1)-1:0] cfg_pool,
  input  logic [$clog2(HP)-1:0] cfg_src,
  input  logic [$clog2(HP)-1:0] cfg_dst,
  input  logic [31:0]           cfg_data
);

  localparam int unsigned NPOOL  = M / HP;
  localparam int unsigned PLW    = (NPOOL > 1) ? $clog2(NPOOL) : 1;
  localparam int unsigned HW     = $clog2(HP);
  localparam int unsigned LW     = $clog2(M);
  localparam int unsigned PORT_W = $clog2(H);
  localparam int unsigned NW     = NPOOL * HP * HP;

  // ---- table ---------------------------------------------------------------
  logic              hdr_valid [NPOOL];
  logic [PORT_W-1:0] hdr_dport [NPOOL];
  logic [PLW-1:0]    hdr_dpool [NPOOL];
  logic [2*P-1:0]    wmem      [NW];

  function automatic int unsigned widx(input int unsigned pool, input int unsigned s,
                                       input int unsigned d);
    return (pool * HP + s) * HP + d;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPOOL; p++) begin
        hdr_valid[p] <= 1'b0;
        hdr_dport[p] <= '0;
        hdr_dpool[p] <= '0;
      end
    end else if (cfg_we && cfg_hdr && (int'(cfg_pool) < NPOOL)) begin
      hdr_valid[cfg_pool] <= cfg_data[PORT_W+PLW];
      hdr_dport[cfg_pool] <= cfg_data[PORT_W+PLW-1:PLW];
      hdr_dpool[cfg_pool] <= cfg_data[PLW-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_hdr && (int'(cfg_pool) < NPOOL))
      wmem[widx(int'(cfg_pool), int'(cfg_src), int'(cfg_dst))] <= cfg_data[2*P-1:0];
  end

  // ---- fan-out engine ------------------------------------------------------
  logic              busy;
  logic [PLW-1:0]    cur_pool;
  logic [HW-1:0]     cur_src;
  logic [HW-1:0]     j;
  logic              cur_pol;
  time_t             cur_ts;
  logic [PORT_W-1:0] cur_dport;
  logic [PLW-1:0]    cur_dpool;

  // Split the incoming address into pool and index within the pool.
  logic [LW-1:0]  ev_local;
  logic [PLW-1:0] ev_pool;
  logic [HW-1:0]  ev_idx;
  always_comb begin
    ev_local = ev_addr[LW-1:0];
    ev_pool  = PLW'(int'(ev_local) / HP);
    ev_idx   = HW'(int'(ev_local) % HP);
  end

  assign ev_ready  = !busy && !start;
  assign unrouted  = ev_valid && ev_ready && !hdr_valid[ev_pool];

  logic [2*P-1:0] w_rd;
  assign w_rd       = wmem[widx(int'(cur_pool), int'(cur_src), int'(j))];
  assign syn_valid  = busy;
  assign syn_dport  = cur_dport;
  assign syn_dlocal = LW'(int'(cur_dpool) * HP + int'(j));
  assign syn_pol    = cur_pol;
  assign syn_wp     = w_rd[2*P-1:P];
  assign syn_wm     = w_rd[P-1:0];
  assign syn_ts     = cur_ts;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur_pool  <= '0;
      cur_src   <= '0;
      j         <= '0;
      cur_pol   <= 1'b0;
      cur_ts    <= '0;
      cur_dport <= '0;
      cur_dpool <= '0;
    end else if (start) begin
      busy <= 1'b0;
    end else if (!busy) begin
      if (ev_valid && hdr_valid[ev_pool]) begin
        busy      <= 1'b1;
        cur_pool  <= ev_pool;
        cur_src   <= ev_idx;
        j         <= '0;
        cur_pol   <= ev_pol;
        cur_ts    <= ev_ts;
        cur_dport <= hdr_dport[ev_pool];
        cur_dpool <= hdr_dpool[ev_pool];
      end
    end else if (syn_ready) begin
      if (j == HW'(HP - 1)) busy <= 1'b0;
      j <= j + 1'b1;
    end
  end

  // The synaptic event is held stable until it is taken.
  a_syn_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
                                 syn_valid && !syn_ready |=> syn_valid && $stable(syn_dlocal));

endmodule
