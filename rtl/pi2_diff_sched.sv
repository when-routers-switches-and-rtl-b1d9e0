// pi2_diff_sched: output stage of a differential pi2 neuron.
//
// A differential neuron has two pi2-CBS shared queues: H1, whose spike time is
// T~+ (fire_p, t_p), and H2, whose spike time is T~- (fire_m, t_m).  With
// sched_en = 1 this block re-encodes them as the paper's Eq. 9-10:
//
//     T_j = ReLU(alpha * (T~- - T~+)),   T+ = V + T_j,   T- = V - T_j,
//
// and emits a polarity-0 (+) event when the system time reaches T+ and a
// polarity-1 (-) event when it reaches T-.  Times count from the start of the
// inference.  T_j is clamped to V so that T- is not negative; an event whose
// time has already passed when it is computed goes out at once and `late`
// pulses (V was chosen too small for causality).  If either queue timed out,
// the neuron emits nothing.  With sched_en = 0 the two CBS spikes are sent as
// they fire: the H2 spike as polarity +, the H1 spike as polarity -, so that
// in both modes a larger T~- - T~+ makes the + event later.
//
// Interface: events leave on ev_valid/ev_pol with a valid/ready handshake and
// stay pending until accepted; at most one event of each polarity per
// inference.  Timing: T_j is computed one cycle after the second CBS spike.
// Follows the paper: Eq. 9-10 and their role as logic beside the switch
// datapath (Supp. A3.1).  This design's choices: integer alpha, clamping, the
// time origin of V, the time-out rule and the bypass polarity mapping.
// Lint note: rst_n is the asynchronous reset of the flops and also disables
// the assertions; verilator reports that simulation-only use as
// SYNCASYNCNET.  No flop uses rst_n synchronously.
module pi2_diff_sched
  import pi2_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  time_t      now,
  input  logic       sched_en,
  input  logic [7:0] alpha,
  input  time_t      v_off,
  input  logic       fire_p,
  input  time_t      t_p,
  input  logic       tmo_p,
  input  logic       fire_m,
  input  time_t      t_m,
  input  logic       tmo_m,
  output logic       ev_valid,
  output logic       ev_pol,
  input  logic       ev_ready,
  output logic       late
);

  logic  got_p, got_m, failed, computed;
  time_t tp_r, tm_r;
  logic  [1:0] pend;         // index = polarity
  time_t slot_t [2];

  // Eq. 9: T_j = ReLU(alpha (T~- - T~+)), clamped to V.
  logic signed [T_W:0]   diff;
  logic        [T_W+8:0] prod;
  time_t                 tj;
  always_comb begin
    diff = $signed({1'b0, tm_r}) - $signed({1'b0, tp_r});
    prod = (diff > 0) ? (T_W+9)'(alpha) * (T_W+9)'(diff) : '0;
    tj   = (prod > (T_W+9)'(v_off)) ? v_off : prod[T_W-1:0];
  end

  wire do_compute = sched_en && got_p && got_m && !computed && !failed;

  // Emission: the pending event whose time has come, earlier time first.
  logic [1:0] due;
  always_comb begin
    for (int s = 0; s < 2; s++) due[s] = pend[s] && (slot_t[s] <= now);
    ev_valid = |due;
    if (due[0] && due[1]) ev_pol = (slot_t[1] < slot_t[0]);
    else                  ev_pol = due[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_p <= 1'b0; got_m <= 1'b0; failed <= 1'b0; computed <= 1'b0;
      tp_r <= '0; tm_r <= '0; pend <= '0;
      slot_t[0] <= '0; slot_t[1] <= '0;
      late <= 1'b0;
    end else if (start) begin
      got_p <= 1'b0; got_m <= 1'b0; failed <= 1'b0; computed <= 1'b0;
      pend <= '0;
      late <= 1'b0;
    end else begin
      late <= 1'b0;
      if (fire_p) begin got_p <= 1'b1; tp_r <= t_p; end
      if (fire_m) begin got_m <= 1'b1; tm_r <= t_m; end
      if (sched_en && (tmo_p || tmo_m)) failed <= 1'b1;
      if (ev_valid && ev_ready) pend[ev_pol] <= 1'b0;
      if (!sched_en) begin
        if (fire_m) begin pend[0] <= 1'b1; slot_t[0] <= t_m; end
        if (fire_p) begin pend[1] <= 1'b1; slot_t[1] <= t_p; end
      end else if (do_compute) begin
        computed  <= 1'b1;
        pend      <= 2'b11;
        slot_t[0] <= v_off + tj;
        slot_t[1] <= v_off - tj;
        late      <= ((v_off - tj) < now);
      end
    end
  end

  // An offered event is held until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || start)
                           ev_valid && !ev_ready |=> ev_valid);

endmodule
