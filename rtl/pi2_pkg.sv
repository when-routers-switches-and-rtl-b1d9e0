// pi2_pkg: constants and types shared by the processing-in-interconnect
// (pi2) switch core.
//
// The pi2 core computes a neural network inside a packet switch: a synaptic
// weight is a queueing delay (the PCP code of the event selects an ATS shaped
// queue), addition is the credit build-up of a credit-based shaper, and the
// non-linearity is the dropping of events by queues that are full or gates
// that have already fired.  Time is kept in integer "time units" of the switch
// system clock.
//
// What follows the paper: a 3-bit PCP (the IEEE 802.1Q field used in the
// paper's network simulation) and 32-bit transmission-eligibility times.
// What is this design's own choice: the 40-bit credit width, the 16-bit K
// field and the register map of the per-port configuration.
// Lint note: the lint tool reports KMAX_DEF as an unused parameter in a
// module that imports the package without using it; it is the default for
// the modules that size queues.
package pi2_pkg;

  // Width of the Priority Code Point, i.e. of a quantised synaptic delay.
  localparam int unsigned P_BITS = 3;
  // Width of a time value (arrival time, TET, spike time).
  localparam int unsigned T_W = 32;
  // Width of the credit (membrane potential) accumulator.
  localparam int unsigned C_W = 40;
  // Width of the K (shared-queue capacity) register.
  localparam int unsigned K_W = 16;
  // Largest K used for the paper's hardware-mapped MNIST network.
  localparam int unsigned KMAX_DEF = 140;

  typedef logic [T_W-1:0]    time_t;
  typedef logic [P_BITS-1:0] pcp_t;
  typedef logic [C_W-1:0]    credit_t;
  typedef logic [K_W-1:0]    kval_t;

  // Run-time parameters of the neurons of one egress port (one layer).
  typedef struct packed {
    kval_t   k;         // shared-queue capacity K (earliest K inputs count)
    credit_t m_thr;     // credit threshold M
    time_t   t_out;     // time-out T_out, 0 disables it
    logic [7:0] alpha;  // scaling alpha of the differential scheduler
    time_t   v_off;     // offset V of the differential scheduler
    logic    sched_en;  // 1: re-encode with V +/- T_j, 0: forward raw CBS spikes
  } neuron_cfg_t;

  // Register map of an egress port's configuration space.
  typedef enum logic [3:0] {
    CFG_K       = 4'd0,
    CFG_M       = 4'd1,
    CFG_TOUT    = 4'd2,
    CFG_ALPHA   = 4'd3,
    CFG_V       = 4'd4,
    CFG_MODE    = 4'd5,
    CFG_MAXTIME = 4'd6   // low address bits select the PCP queue
  } cfg_reg_e;

endpackage
