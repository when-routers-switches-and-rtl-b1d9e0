// tb_pi2_tx_select: self-checking test of the egress transmission selection.
//
// Random request vectors (requests stay up until granted, as the neurons'
// output events do) and a random receiver ready.  Checks: exactly the
// offered index is granted when the receiver is ready, nothing otherwise;
// the offered index is a requester; the polarity matches; the choice is
// round-robin (the first requester at or after the last grant + 1); and no
// requester waits more than N grants (starvation bound).
module tb_pi2_tx_select;
  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req = '0, req_pol = '0, gnt;
  logic         out_valid, out_pol, out_ready = 0;
  logic [$clog2(N)-1:0] out_idx;

  pi2_tx_select #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_ptr = 0, wait_n [N], n_gnt = 0;
  logic [N-1:0] taken = '0;   // grants of the last clock edge
  always @(posedge clk) if (rst_n) begin
    int e;
    e = -1;
    for (int o = 0; o < N; o++) if (e < 0 && req[(exp_ptr + o) % N]) e = (exp_ptr + o) % N;
    check(out_valid == (e >= 0), "out_valid");
    if (e >= 0) begin
      check(int'(out_idx) == e, $sformatf("round robin: idx %0d exp %0d", out_idx, e));
      check(out_pol == req_pol[e], "polarity");
      check(gnt == (out_ready ? (N'(1) << e) : '0), "grant");
      if (out_ready) begin
        taken[e] = 1'b1;
        exp_ptr = (e + 1) % N;
        n_gnt++;
        for (int i = 0; i < N; i++) if (req[i] && i != e) begin
          wait_n[i]++;
          check(wait_n[i] < N, "starvation bound");
        end
        wait_n[e] = 0;
      end
    end else check(gnt == '0, "no grant");
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      // granted requests drop; new ones appear at random
      for (int i = 0; i < N; i++) begin
        if (taken[i]) req[i] = 0;
        if (!req[i] && $urandom_range(0, 3) == 0) begin req[i] = 1; req_pol[i] = 1'($urandom_range(0, 1)); end
      end
      taken = '0;
      out_ready = ($urandom_range(0, 3) != 0);
    end
    check(n_gnt > 1000, "traffic flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
