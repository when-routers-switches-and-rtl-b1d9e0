# A neural network computed inside a packet switch

Most neuromorphic hardware stores weights in memory and multiplies them in
arithmetic units. This design needs neither. An Ethernet-style switch is
already built for three things: delaying packets, sorting them in queues, and
dropping them when queues overflow. Those three primitives are enough to
evaluate a spiking neural network. Each neuron fires once, and its value is the
*time* of that spike:

| Neural operation | Switch mechanism |
|---|---|
| multiply by a weight | a queueing delay chosen by the packet's priority code (PCP) |
| sum of the weighted inputs | a credit-based shaper whose credit grows at the rate of its queue length |
| non-linearity | events dropped by full queues, by gates that already fired, or by time-outs |
| spike | a packet released by the shaper gate |

The RTL here is a small switch core of this kind. It takes address events (an
address plus one polarity bit) on an input port. It routes them through
per-port tables, delays them in shaped queues, and computes neurons in shared
queues. Output spikes loop back for the next layer or leave on the external
output port. All of it is synthesizable SystemVerilog with self-checking
testbenches.

## 1. The neuron: earliest-K arithmetic

A neuron `j` receives input spikes at times `t_i`. Each input is delayed by its
synaptic delay `w_ij`, so it arrives at `a_i = t_i + w_ij`. The neuron keeps
only the K earliest arrivals and fires at

    T_j = M/K + (1/K) * sum of the K earliest a_i

This is a "mean of the first K arrivals, plus a bias". A larger delay pushes
the output later; that is the weight. The cut at K, which drops every
arrival after the K-th, is the non-linearity.

The credit-based shaper computes `T_j` without an adder tree or a divider:

* The shared queue holds up to K events. An event arriving at a full queue is
  dropped.
* At each time-unit tick, the credit (the membrane potential) grows by the
  current queue length. Once K events are queued, the credit after time `t`
  is `sum(t - a_i) = K*t - sum(a_i)`.
* The gate opens as soon as `credit >= M`. That is the first `t` with
  `K*t >= M + sum(a_i)`, which is `T_j` rounded up to a whole time unit.
* Opening the gate sends one spike and resets the credit. All events left in
  the queue are flushed. Later arrivals in the same inference are dropped.
* If the threshold is not reached within `T_out` time units of the first
  arrival, the queue is flushed and nothing is sent (a time-out).

With fewer than K arrivals, the credit still grows, only more slowly, so such
a neuron fires late. This is the behaviour the credit rule gives, and the RTL
keeps it.

`pi2_cbs_neuron` builds one shared queue. Its queue is just a counter,
because the events themselves are never read again; only their count matters.
Two details are this design's own choices:

* Each arriving event carries its eligibility time (TET). If the shaped queue
  released it a few cycles late, the late part (`now - TET`) is added to the
  credit at once. The result is then independent of release latency.
* The shaped queues never release in the cycle of a tick. So the gate decision
  in the last cycle of a time unit sees every arrival of that unit, and
  `fire_time` is exact.

## 2. Synapses: shaped queues as delay lines

`pi2_ats_synapse` gives a neuron input 2^P shaped queues, one per PCP value
(P = 3, so 8 queues). Each queue `q` has a configurable residence time
`max_time[q]`. An event with code `q` that arrived at `T_i` becomes eligible at

    TET = T_i + max_time[q]

This is an asynchronous traffic shaper whose committed rate is set to
infinity and whose burst size is set to zero, so its eligibility time is
simply the arrival time. The residence-time bound then acts as the delay.

* All events in one queue share one delay, so each queue stays sorted in time
  order and is a plain FIFO.
* Each queue holds DEPTH = KMAX events. A full queue drops the new event. This
  is the second drop mechanism.
* Each cycle (except a tick cycle), the queue heads that have reached their
  TET compete. The earliest TET is released to the shared queue, one event
  per cycle.

A weight is therefore a 3-bit code. The values it stands for live in the
`max_time` registers of the port. By default `max_time[q] = q` time units.

## 3. Signed values: the differential neuron

Delays are never negative, so a single timed spike cannot carry a signed
weight. Each value is therefore carried by a *pair* of spikes, `T+` and `T-`,
and each synapse has two delay codes, `W+` and `W-`. A neuron
(`pi2_neuron`) contains two synapse/shared-queue sets:

    H1 (result T~+):  T+ inputs delayed by W+,  T- inputs delayed by W-
    H2 (result T~-):  T+ inputs delayed by W-,  T- inputs delayed by W+

Each synaptic event arrives tagged with its polarity. It is written into
*both* sets at once, with the delay codes swapped between them. The two CBS
spike times go to the differential scheduler (`pi2_diff_sched`), which has two
modes:

* **Scheduled mode** (`sched_en = 1`) re-encodes the result as the layer's
  output:

      T_j = ReLU(alpha * (T~- - T~+))      (clamped to V)
      + event at time V + T_j,   - event at time V - T_j

  `V` is an offset large enough that `V - T_j` does not lie in the past.
  Times count from the start of the inference. If the computed time has
  already passed, the event goes out at once and `late` pulses. If either
  shared queue timed out, the neuron sends nothing.
* **Bypass mode** (`sched_en = 0`) sends the two CBS spikes as they fire:
  the H2 spike as polarity +, the H1 spike as polarity -. In both modes, a
  larger `T~- - T~+` makes the + event later.

The scheduler is the only arithmetic in the datapath: one subtraction, one
small multiplication and one comparison per neuron per inference. It runs one
cycle after the second CBS spike.

## 4. The switch: event path and addressing

`pi2_switch` has H = 4 ports. Each port has M = 32 neurons, and a neuron is
addressed `{port, pool, index}` (7 bits) plus the polarity bit.

```
 ext in ──► port 0 ingress ─► route LUT 0 ─┐
 loop   ──► port 1 ingress ─► route LUT 1 ─┤  crossbar   ┌─► egress 1 (32 neurons) ─► loop to port 1
 loop   ──► port 2 ingress ─► route LUT 2 ─┼────────────►├─► egress 2 (32 neurons) ─► loop to port 2
                                           ┘             └─► egress 3 (32 neurons) ─► ext out
```

* **Ingress** (`pi2_ingress`, `pi2_fifo`) stamps each event with the current
  system time, which is its arrival time `T_i`. It then buffers the event
  (16 entries). `in_ready` falls while the buffer is full; this is the
  stall.
* **Routing lookup** (`pi2_route_lut`). Each port's 32 neurons form pools of
  HP = 16. Each source pool is connected to one destination pool `(dport,
  dpool)`, fully connected (16 × 16 synapses, each with a code pair
  `{W+, W-}`).
  * A Tx event is fanned out into 16 synaptic events, one per cycle. So a time
    unit must be at least 16 cycles per input event; the default time unit is
    `TICK_DIV = 64` cycles.
  * A pool with no valid header drops the event and pulses `unrouted`.
* **Traffic classification** (`pi2_xbar`) is a 3 × 3 crossbar with one
  round-robin arbiter per output. It delivers at most one synaptic event per
  cycle to each egress port. A source that loses waits.
* **Egress** (`pi2_egress`) holds the 32 neurons of a port and their
  configuration registers.
  * **Transmission selection** (`pi2_tx_select`) is a round-robin arbiter that
    merges the neurons' output events onto the port.
  * The egress never back-pressures the crossbar. Each neuron decides for
    itself to keep or drop an event.
* **Recursion.** Output ports 1 and 2 are wired back to input ports 1 and 2.
  A hidden neuron's spike therefore re-enters the switch as a new Tx event,
  with a new arrival time stamp. Port 3 is the external output. Port 0 is the
  external input, so its 32 "neurons" are only transmitters.

A network of L layers maps onto this as a chain: input port 0 pool p → egress
1 pool q → loop-back port 1 → egress 3, and so on.

### Time base

`pi2_timebase` divides the clock by `TICK_DIV`. `now` holds the current time
unit, and `tick` is high in the last cycle of each unit. `start` begins an
inference. It returns `now` to 0 and clears every buffer, queue, credit and
scheduler. Tables and configuration are kept.

### Latency summary

| Stage | Latency |
|---|---|
| ingress buffer | 1 cycle (the event is visible the cycle after it is accepted) |
| route LUT | 1 cycle to the first synaptic event, then 1 per cycle, 16 per Tx event |
| crossbar | combinational |
| shaped queue | enters 1 cycle after the crossbar; released at the first non-tick cycle with `TET <= now` |
| CBS gate | `fire` is registered: 1 cycle after the credit reaches M |
| scheduler | 1 cycle after the second CBS spike, then waits for `V ± T_j` |
| transmission selection | combinational |

All results are quantised to whole time units. No result depends on
cycle-level latency, as long as a unit's fan-out fits in the unit.

## 5. Configuration

All configuration goes through one write port: `cfg_we`, `cfg_lut`,
`cfg_port`, `cfg_addr[23:0]` and `cfg_data[39:0]`.

**Routing table** (`cfg_lut = 1`; `cfg_port` is the input port, 0..2).
`HW = log2 HP = 4` and `PLW = log2(M/HP) = 1`.

| `cfg_addr[23]` | fields | `cfg_data` |
|---|---|---|
| 1 (header) | pool = `cfg_addr[2*HW +: PLW]` | `{valid, dport[1:0], dpool}` (bit 3 = valid) |
| 0 (weights) | pool, src = `cfg_addr[HW +: HW]`, dst = `cfg_addr[0 +: HW]` | `{W+[2:0], W-[2:0]}` |

**Egress registers** (`cfg_lut = 0`; `cfg_port` is the output port, 1..3).
The register is `cfg_addr[7:4]` (`pi2_pkg::cfg_reg_e`):

| reg | name | meaning | reset |
|---|---|---|---|
| 0 | `CFG_K` | shared-queue capacity K (at most KMAX = 140) | KMAX |
| 1 | `CFG_M` | credit threshold M | 0 |
| 2 | `CFG_TOUT` | time-out in units, 0 = none | 0 |
| 3 | `CFG_ALPHA` | scheduler scale α (integer) | 1 |
| 4 | `CFG_V` | scheduler offset V | 0 |
| 5 | `CFG_MODE` | 1 = scheduled, 0 = bypass | 0 |
| 6 | `CFG_MAXTIME` | delay of PCP queue `cfg_addr[2:0]` | q |

All neurons of one egress port (one layer) share these values. This matches
layer-wise K, M and T_out.

Status counters (16-bit, saturating, cleared by `start`) are kept per egress
port: shaped-queue drops, shared-queue drops, CBS spikes, time-outs and late
scheduled events. One more counter, for unrouted events, covers the whole
switch.

## 6. Sizes

| Parameter | Default here | Target in the original proposal |
|---|---|---|
| ports H | 4 | 512 (a large data-centre switch) |
| neurons per port M | 32 | hundreds of millions, with tables in external memory |
| pool / fan-out HP | 16 | about 1000 |
| PCP bits P | 3 | 3 (4 in the scaling estimate) |
| queue depth KMAX | 140 | K = 140, the largest K of the MNIST network |
| time width | 32 bit | 32 bit |

The defaults build a complete, synthesizable core with about 93k cells and
6.9 Mbit of queue storage. That storage is dominated by 96 neurons × 2 sets ×
8 queues × 140 entries × 32 bits. The RTL is parameterised in all of these.

What fits: the 2-input, 10-hidden, 2-output XOR network of the differential
example fits. Its 2 × 10 and 10 × 2 synapses each fit one 16 × 16 pool table,
and K ≤ 3. MNIST 784-50-10 or larger does not fit. A 784-wide input layer needs
more neurons per port and larger pools.

## 7. Departures from the original proposal

* **Both polarities sent.** Every differential neuron sends both its `T+`
  and its `T-` event. The proposal's sparse scheme would send only one.
* **On-chip tables only.** Routing tables are registers on chip. There is no
  external memory (HBM) port, lookup cache or multi-level lookup, and there
  are no Ethernet MACs or frames. Events are bare address events.
* **Loop-back inside the core.** The recursive route of an output spike back
  into the switch is a wire inside the core, not a physical port-to-port
  cable.
* **Pool-to-pool connectivity.** Each source pool connects fully to exactly
  one destination pool. Arbitrary sparse connectivity would need the external
  table memory.
* **Integer scheduler.** α is an 8-bit integer. `T_j` is clamped to V, so `V -
  T_j` is never negative.
* **Time origin.** V counts from the start of the inference. The time-out
  counts from the first arrival at the shared queue.
* **One spike per inference.** After the gate opens, the neuron ignores
  further input until `start`. Credit saturates instead of wrapping.
* **One release per cycle.** Each synapse block releases at most one event per
  cycle. Late releases are corrected in the credit (section 1).
* **No Hi/Lo credit limits.** A conventional credit-based shaper also
  compares its credit with high and low limits and raises an interrupt. The
  neuron here has only the `>= M` comparison.
* **No shaping at the output port.** The ports carry address events at one
  per cycle, with no line-rate model.

## 8. Simulation

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each prints `TB_RESULT checks=<n> failures=<n>` and ends with `$finish`.
Each has a watchdog. With verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_pi2_switch \
  -y rtl -y tb +libext+.sv -Irtl rtl/pi2_pkg.sv tb/tb_pi2_switch.sv
./obj_dir/Vtb_pi2_switch
```

Replace `tb_pi2_switch` with any other testbench name. The testbenches
compute their expected results independently:

* `tb_pi2_cbs_neuron`, `tb_pi2_neuron` and `tb_pi2_egress` use a reference
  model of the earliest-K credit rule. It includes drops at a full queue,
  after the spike, and at time-outs.
* `tb_pi2_diff_sched` checks Eq. `V ± ReLU(α(T~- - T~+))`, clamping, late
  events, time-outs and bypass mode.
* `tb_pi2_ats_synapse` checks release order and time against a sorted model,
  with random traffic, overflow drops and tick holds.
* `tb_pi2_fifo`, `tb_pi2_ingress`, `tb_pi2_xbar`, `tb_pi2_tx_select`,
  `tb_pi2_route_lut` and `tb_pi2_timebase` run random handshake traffic
  against scoreboards.
* `tb_pi2_switch` runs the switch at its default size with no parameter
  overrides. It programs a two-layer XOR-shaped network (input port 0 → hidden
  egress 1 → loop-back → output egress 3). It runs inferences in both modes
  and compares every output spike with a software model of the whole network.
  It also forces each mechanism at least once: input stalls, shaped-queue
  overflow, shared-queue drops, time-outs, late events, unrouted events and
  loop-back traffic. It takes about 25 s including the build.

* `tb_pi2_xor` runs the 2-input, 10-hidden, 2-output XOR network on the
  switch at its default size, once with K = 2 and 3 and once with K = 1 in the
  hidden and output layers. Input samples follow the XOR rule on the signs
  of (x0, x1). Each value x is sent as a + event at `8 + 4x` and a - event at
  `8 - 4x`. The delay codes are random, because no trained delays are at
  hand, so the printed agreement with the labels says nothing about accuracy.
  What the test checks is that every hidden and output spike matches the
  reference model.

The assertions (`--assert`) check handshake rules, queue bounds, and that a
spike always leaves the neuron with zero credit.
