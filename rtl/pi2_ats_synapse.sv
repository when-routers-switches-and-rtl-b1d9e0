// pi2_ats_synapse: the synapses of one neuron input, built as a modified
// IEEE 802.1Qcr asynchronous traffic shaper (pi2-ATS).
//
// There are 2^P shaped queues, one per Priority Code Point.  A synaptic event
// with PCP q that arrived at time T_i is admitted to queue q and gets the
// transmission-eligibility time TET = T_i + max_time[q]: with the shaper's
// committed rate set to infinity and its burst size to zero, the standard
// eligibility time equals the arrival time and the frame is scheduled at the
// residence-time bound, which is reinterpreted as the synaptic delay.  A queue
// that already holds DEPTH (= K) events drops the new one (drop pulse).
// Events in one queue share one delay, so each queue stays sorted by TET.
//
// Each cycle except when `hold` is high, among the queues whose head has reached its TET (TET <= now),
// the one with the earliest TET is released to the neuron's shared queue
// (rel_valid, rel_tet): releases leave in time order, one per cycle.  `start`
// flushes all queues.
//
// Follows the paper: per-PCP queues of K entries, TET = T_i + W, drop on full,
// release at TET.  This design's choices: one release per cycle, release of
// the TET value so the neuron can account for any release latency, and the
// reset value max_time[q] = q time units (the paper's "delay of 0 - (2^p-1)
// time units").
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
module pi2_ats_synapse
  import pi2_pkg::*;
#(
  parameter int unsigned P     = P_BITS,
  parameter int unsigned DEPTH = KMAX_DEF
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  time_t  now,
  input  logic   hold,      // no release in this cycle (the time-unit tick)
  // synaptic event in
  input  logic   in_valid,
  input  logic [P-1:0] in_pcp,
  input  time_t  in_ts,
  // per-queue residence bound = synaptic delay of each PCP code
  input  time_t  max_time [2**P],
  // release to the shared queue
  output logic   rel_valid,
  output time_t  rel_tet,
  // shaped-queue overflow
  output logic   drop
);

  localparam int unsigned NQ = 2**P;
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [AW-1:0] rd_ptr[NQ];
  logic [AW-1:0] wr_ptr[NQ];
  logic [AW:0]   count [NQ];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  wire in_full = (count[in_pcp] == (AW+1)'(DEPTH));
  wire do_push = in_valid && !in_full && !start;
  assign drop  = in_valid && in_full && !start;

  // One TET memory per queue (one write and one read port each), its head
  // and the head's eligibility.
  time_t         head [NQ];
  logic [NQ-1:0] elig;
  for (genvar q = 0; q < NQ; q++) begin : g_q
    time_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (do_push && (in_pcp == P'(q))) mem[wr_ptr[q]] <= in_ts + max_time[q];
    end
    assign head[q] = mem[rd_ptr[q]];
    assign elig[q] = !hold && (count[q] != '0) && (head[q] <= now);
  end

  // Earliest eligible head (lowest PCP wins a tie).
  logic [P-1:0] sel;
  always_comb begin
    sel = '0;
    rel_valid = 1'b0;
    for (int q = 0; q < NQ; q++) begin
      if (elig[q] && (!rel_valid || head[q] < head[sel])) begin
        sel = P'(q);
        rel_valid = 1'b1;
      end
    end
  end
  assign rel_tet = head[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin
        rd_ptr[q] <= '0;
        wr_ptr[q] <= '0;
        count[q]  <= '0;
      end
    end else if (start) begin
      for (int q = 0; q < NQ; q++) begin
        rd_ptr[q] <= '0;
        wr_ptr[q] <= '0;
        count[q]  <= '0;
      end
    end else begin
      for (int q = 0; q < NQ; q++) begin
        automatic logic psh = do_push && (in_pcp == P'(q));
        automatic logic pp  = rel_valid && (sel == P'(q));
        if (psh) wr_ptr[q] <= inc(wr_ptr[q]);
        if (pp)  rd_ptr[q] <= inc(rd_ptr[q]);
        count[q] <= count[q] + (AW+1)'(psh) - (AW+1)'(pp);
      end
    end
  end

  // A released event has reached its eligibility time.
  a_release_eligible: assert property (@(posedge clk) disable iff (!rst_n)
                                       rel_valid |-> rel_tet <= now);

endmodule
