// tb_pi2_ats_synapse: self-checking test of the pi2-ATS shaped queues.
//
// Random synaptic events (random PCP, arrival time = current time) are sent
// to a block with DEPTH = 4 and random per-queue delays.  A queue model kept
// here predicts, cycle by cycle, which event must be released: among the
// queues whose head TET = T_i + max_time[PCP] has been reached, the earliest,
// never in a hold (tick) cycle; and which arrivals must be dropped because
// their queue is full.  Release time is checked against TET: under the light
// load of the second phase every event must leave within one time unit of its TET.
module tb_pi2_ats_synapse;
  import pi2_pkg::*;

  localparam int P = 3, NQ = 8, DEPTH = 4, TICK_DIV = 4;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t now = 0;
  int    cyc = 0;
  logic  hold;
  assign hold = (cyc % TICK_DIV) == TICK_DIV - 1;
  always @(posedge clk) begin cyc <= cyc + 1; if (hold) now <= now + 1; end

  logic         in_valid = 0;
  logic [P-1:0] in_pcp = 0;
  time_t        in_ts = 0;
  time_t        max_time [NQ];
  logic         rel_valid, drop;
  time_t        rel_tet;

  pi2_ats_synapse #(.P(P), .DEPTH(DEPTH)) dut (.*);

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

  // queue model
  time_t mq [NQ][$];
  int n_rel = 0, n_drop = 0, n_late = 0;
  bit phase2 = 0;

  always @(posedge clk) if (rst_n) begin
    bit    e_valid;
    int    e_q;
    time_t e_tet;
    bit    full;
    e_valid = 0; e_q = 0; e_tet = 0;
    full = in_valid && mq[in_pcp].size() == DEPTH;
    for (int q = 0; q < NQ; q++)
      if (!hold && mq[q].size() > 0 && mq[q][0] <= now)
        if (!e_valid || mq[q][0] < e_tet) begin e_valid = 1; e_q = q; e_tet = mq[q][0]; end
    check(rel_valid == e_valid, $sformatf("rel_valid %0d exp %0d at now %0d", rel_valid, e_valid, now));
    if (e_valid && rel_valid) begin
      check(rel_tet == e_tet, $sformatf("rel_tet %0d exp %0d", rel_tet, e_tet));
      n_rel++;
      if (phase2 && now - rel_tet > 1) n_late++;
      void'(mq[e_q].pop_front());
    end
    if (in_valid) begin
      check(drop == full, $sformatf("drop %0d exp %0d", drop, full));
      if (full) n_drop++;
      else mq[in_pcp].push_back(in_ts + max_time[in_pcp]);
    end else check(!drop, "no drop without input");
  end

  initial begin
    for (int q = 0; q < NQ; q++) max_time[q] = time_t'($urandom_range(0, 12));
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: heavy random traffic, queues overflow
    repeat (3000) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < 60);
      in_pcp   = P'($urandom_range(0, NQ - 1));
      in_ts    = now;
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(negedge clk);
    // phase 2: light traffic, every event leaves in its own time unit
    phase2 = 1;
    for (int q = 0; q < NQ; q++) max_time[q] = time_t'(q);   // delay = PCP code
    repeat (3000) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < 5);
      in_pcp   = P'($urandom_range(0, NQ - 1));
      in_ts    = now;
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(negedge clk);
    check(n_drop > 0, "overflow drops happened");
    check(n_late == 0, $sformatf("light load: %0d events released after their time unit", n_late));
    for (int q = 0; q < NQ; q++) check(mq[q].size() == 0, "all queues drained");
    // start flushes the queues
    @(negedge clk); in_valid = 1; in_pcp = 3; in_ts = now + 1000; max_time[3] = 0;
    @(negedge clk); in_valid = 0; start = 1;
    @(negedge clk); start = 0;
    mq[3].delete();
    repeat (50) @(negedge clk);
    $display("released %0d dropped %0d", n_rel, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
