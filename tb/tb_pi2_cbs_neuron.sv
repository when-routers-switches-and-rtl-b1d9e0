// tb_pi2_cbs_neuron: self-checking test of the pi2-CBS shared queue.
//
// Random trials give the neuron a set of arrival times, a capacity K and a
// threshold M.  The expected spike time is worked out here from the
// definition: the first integer time T >= t_1 at which
// sum over the first K accepted arrivals with t_j <= T of (T - t_j) >= M,
// i.e. ceil((M + sum t_j)/K) once K events are queued.  The number of drops
// (arrivals beyond K, arrivals after the spike) is checked too.  Directed
// trials check the time-out, K = 1 with M = 0 (spike on the first arrival)
// and a late release from the ATS queue, whose age must still be counted.
module tb_pi2_cbs_neuron;
  import pi2_pkg::*;

  localparam int TICK_DIV = 8;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t now = 0;
  int    cyc = 0;
  logic  tick;
  assign tick = (cyc % TICK_DIV) == TICK_DIV - 1;
  always @(posedge clk) begin
    if (start) begin now <= 0; cyc <= 0; end
    else begin cyc <= cyc + 1; if (tick) now <= now + 1; end
  end

  kval_t   k;
  credit_t m_thr;
  time_t   t_out;
  logic    rel_valid;
  time_t   rel_tet;
  logic    fire, tmo, drop;
  time_t   fire_time;
  kval_t   qlen;
  credit_t credit;

  pi2_cbs_neuron dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_fire, n_tmo, n_drop;
  time_t last_fire;
  always @(posedge clk) if (rst_n && !start) begin
    if (fire) begin n_fire++; last_fire = fire_time; end
    if (tmo) n_tmo++;
    if (drop) n_drop++;
  end

  // Drive `arr` (sorted times), each released `lag` units after its TET.
  task automatic run(input int arr[$], input int lag, input int units);
    int idx = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n_fire = 0; n_tmo = 0; n_drop = 0;
    while (now < time_t'(units)) begin
      rel_valid = 0;
      if (idx < arr.size() && !tick && now >= time_t'(arr[idx] + lag)) begin
        rel_valid = 1; rel_tet = time_t'(arr[idx]); idx++;
      end
      @(negedge clk);
    end
    rel_valid = 0;
  endtask

  // Reference: spike time (or -1) and number of drops.
  function automatic void ref_model(input int arr[$], input int kk, input longint mm,
                                    output int t_fire, output int drops);
    int acc[$];
    bit fired = 0;
    arr.sort();
    t_fire = -1; drops = 0;
    for (int t = 0; t < 2000 && !fired; t++) begin
      longint c = 0;
      // the credit gathered up to the start of unit t opens the gate at once
      foreach (acc[i]) c += longint'(t - acc[i]);
      if (acc.size() > 0 && c >= mm) begin t_fire = t; fired = 1; end
      else begin
        foreach (arr[i]) if (arr[i] == t) begin
          if (acc.size() < kk && !(mm == 0 && acc.size() > 0)) acc.push_back(arr[i]);
          else drops++;
        end
        // M = 0: the gate opens on the first arrival
        if (acc.size() > 0 && mm == 0) begin t_fire = t; fired = 1; t_fire = -t - 1; end
      end
    end
    // arrivals at or after the spike are dropped (same-unit ones already counted for M = 0)
    if (t_fire < -1) begin t_fire = -t_fire - 1; foreach (arr[i]) if (arr[i] > t_fire) drops++; end
    else if (t_fire >= 0) foreach (arr[i]) if (arr[i] >= t_fire) drops++;
  endfunction

  initial begin
    int arr[$];
    int tf, dr, n;
    rel_valid = 0; rel_tet = 0; k = 4; m_thr = 0; t_out = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- random trials ----
    for (int trial = 0; trial < 60; trial++) begin
      arr.delete();
      n = 1 + $urandom_range(0, 9);
      for (int i = 0; i < n; i++) arr.push_back($urandom_range(0, 30));
      arr.sort();
      // at most 4 arrivals per unit so they fit in a time unit
      for (int i = 4; i < arr.size(); i++) if (arr[i] == arr[i-4]) arr[i]++;
      arr.sort();
      k = kval_t'($urandom_range(1, 6));
      m_thr = credit_t'($urandom_range(0, 60));
      t_out = 0;
      ref_model(arr, int'(k), longint'(m_thr), tf, dr);
      run(arr, 0, 120);
      if (tf >= 0) begin
        check(n_fire == 1, $sformatf("trial %0d fires once (got %0d)", trial, n_fire));
        check(last_fire == time_t'(tf), $sformatf("trial %0d fire time %0d exp %0d", trial, last_fire, tf));
      end else begin
        check(n_fire == 0, $sformatf("trial %0d no fire", trial));
      end
      check(n_drop == dr, $sformatf("trial %0d drops %0d exp %0d", trial, n_drop, dr));
    end

    // ---- the paper's closed form: K arrivals, T = ceil((M + sum)/K) ----
    arr = '{3, 5, 6}; k = 3; m_thr = 20; t_out = 0;
    run(arr, 0, 60);
    check(n_fire == 1 && last_fire == time_t'((20 + 3 + 5 + 6 + 2) / 3),
          $sformatf("closed form K=3 M=20: %0d", last_fire));

    // ---- K = 1, M = 0: spike on the first arrival ----
    arr = '{7, 9, 12}; k = 1; m_thr = 0;
    run(arr, 0, 40);
    check(n_fire == 1 && last_fire == 7, $sformatf("K=1 M=0 spike at first arrival: %0d", last_fire));
    check(n_drop == 2, "K=1 later arrivals dropped");

    // ---- time-out: threshold not reached within T_out ----
    arr = '{4}; k = 2; m_thr = 100; t_out = 10;
    run(arr, 0, 40);
    check(n_tmo == 1 && n_fire == 0, $sformatf("time-out (tmo=%0d fire=%0d)", n_tmo, n_fire));
    // after the time-out the queue starts again
    arr = '{4, 30, 31}; k = 2; m_thr = 30; t_out = 20;
    run(arr, 0, 80);
    // 4 times out at 24 (credit 20); 30,31 -> credit(t) = 2t-61 >= 30 -> t = 46
    check(n_tmo == 1 && n_fire == 1 && last_fire == 46, $sformatf("restart after time-out: %0d", last_fire));

    // ---- late release: age still counted ----
    arr = '{2, 3}; k = 2; m_thr = 30; t_out = 0;
    run(arr, 3, 60);
    // credit(t) = 2t - 5 >= 30 -> t = 18 (ceil 17.5)
    check(n_fire == 1 && last_fire == 18, $sformatf("late release fire %0d exp 18", last_fire));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
