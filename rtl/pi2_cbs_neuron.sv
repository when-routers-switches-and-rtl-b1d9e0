// pi2_cbs_neuron: one shared queue of a pi2 neuron, governed by the modified
// IEEE 802.1Qav credit-based shaper (pi2-CBS).  It computes
//
//     T = M/K + (1/K) * sum of the K earliest arrival times,
//
// the pi2_K neuron of the paper, as follows.  The shared queue is represented
// by its queue-length counter `qlen` (capacity K, the k input); events released
// by the ATS synapses enter it and an event arriving when qlen == K is
// dropped.  The credit (membrane potential) grows by qlen at every time-unit
// tick, so after K arrivals at t_1..t_K it equals sum(t - t_j).  When the
// credit reaches the threshold M (credits >= M instead of >= 0) the gate opens
// and one event is transmitted: `fire` pulses with fire_time = now, the credit
// drops to 0 and the events left in the queue are dropped.  The neuron then
// stays silent (further arrivals dropped) until `start` begins the next
// inference.  If M is not reached within t_out time units of the first
// arrival the queue is flushed and the credit reset (`tmo` pulse); t_out = 0
// disables the time-out.  An empty queue has zero credit.
//
// Each arrival also adds its age (now - TET) to the credit so that the result
// counts from the eligibility time even when the release from the ATS queue
// came late; for prompt releases the age is 0.  The ATS queues never release
// in a tick cycle, so the gate decision made in the last cycle of time unit t
// sees every arrival of that unit and fire_time is exact.
//
// Timing: fire is registered; it is high for one cycle, the cycle after the
// credit reached M, with fire_time the time unit in which that happened.
// Follows the paper: threshold M, increment by queue length, capacity K, reset
// on transmission, time-out flush (Table S1, Fig. S6B).  This design's choices:
// one-shot firing per inference, time-out measured from the first arrival,
// age correction, saturating credit.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
module pi2_cbs_neuron
  import pi2_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  time_t   now,
  input  logic    tick,
  // configuration
  input  kval_t   k,
  input  credit_t m_thr,
  input  time_t   t_out,
  // arrivals from the ATS shaped queues
  input  logic    rel_valid,
  input  time_t   rel_tet,
  // outputs
  output logic    fire,
  output time_t   fire_time,
  output logic    tmo,
  output logic    drop,
  output kval_t   qlen,
  output credit_t credit
);

  logic  done;     // fired in this inference
  time_t t_first;  // time of the first arrival into the empty queue

  wire gate_open = !done && (qlen != '0) && (credit >= m_thr);
  wire timed_out = !done && !gate_open && (qlen != '0) && (t_out != '0) &&
                   ((now - t_first) >= t_out);

  wire accept = rel_valid && !done && (qlen < k) && !gate_open && !timed_out;
  assign drop = rel_valid && !accept && !start;

  // Age of the arriving event (arrivals never coincide with a tick).
  time_t age;
  assign age = now - rel_tet;

  // Credit after this cycle, before the gate decision.
  credit_t credit_inc, credit_next;
  always_comb begin
    credit_inc = '0;
    if (tick)   credit_inc = credit_inc + credit_t'(qlen);
    if (accept) credit_inc = credit_inc + credit_t'(age);
    credit_next = credit + credit_inc;
    if (credit_next < credit) credit_next = '1;   // saturate
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qlen      <= '0;
      credit    <= '0;
      done      <= 1'b0;
      t_first   <= '0;
      fire      <= 1'b0;
      fire_time <= '0;
      tmo       <= 1'b0;
    end else if (start) begin
      qlen      <= '0;
      credit    <= '0;
      done      <= 1'b0;
      t_first   <= '0;
      fire      <= 1'b0;
      tmo       <= 1'b0;
    end else begin
      fire <= 1'b0;
      tmo  <= 1'b0;
      if (gate_open) begin
        // transmit one event, credit to 0, drop the rest of the queue
        fire      <= 1'b1;
        fire_time <= now;
        done      <= 1'b1;
        qlen      <= '0;
        credit    <= '0;
      end else if (timed_out) begin
        tmo    <= 1'b1;
        qlen   <= '0;
        credit <= '0;
      end else begin
        if (accept) begin
          qlen <= qlen + 1'b1;
          if (qlen == '0) t_first <= rel_tet;
        end
        credit <= (qlen == '0 && !accept) ? '0 : credit_next;
      end
    end
  end

  a_no_arrival_at_tick: assert property (@(posedge clk) disable iff (!rst_n) rel_valid |-> !tick);
  a_qlen_le_k: assert property (@(posedge clk) disable iff (!rst_n) qlen <= k);

endmodule
