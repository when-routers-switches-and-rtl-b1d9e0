// tb_pi2_ingress: self-checking test of ingress processing.
//
// Random spike events enter with a valid/ready handshake and random
// back-pressure on the output.  Checks: events leave in order with their
// address and polarity, each stamped with the system time at which it was
// accepted; nothing is lost or duplicated; `start` flushes the buffer and
// blocks both sides in its cycle; the buffer fills under back-pressure.
module tb_pi2_ingress;
  import pi2_pkg::*;
  localparam int AW = 7, DEPTH = 4;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  time_t now = 0;
  always @(posedge clk) now <= now + 1;

  logic          in_valid = 0, in_ready, in_pol = 0;
  logic [AW-1:0] in_addr = 0;
  logic          out_valid, out_ready = 0, out_pol;
  logic [AW-1:0] out_addr;
  time_t         out_ts;

  pi2_ingress #(.AW(AW), .DEPTH(DEPTH)) dut (.*);

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

  logic [AW+T_W:0] q [$];
  int n_out = 0, n_stall = 0;
  bit took = 0;   // input accepted at the last clock edge
  always @(posedge clk) if (rst_n) begin
    if (start) begin
      check(!in_ready && !out_valid, "start blocks both sides");
      q.delete();
    end else begin
      check(out_valid == (q.size() > 0), "out_valid");
      check(in_ready == (q.size() < DEPTH), "in_ready");
      if (out_valid && q.size() > 0) begin
        check({out_addr, out_pol, out_ts} == q[0], "event order and time stamp");
        if (out_ready) begin void'(q.pop_front()); n_out++; end
      end
      if (in_valid && !in_ready) n_stall++;
      took = in_valid && in_ready;
      if (took) q.push_back({in_addr, in_pol, now});
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (!in_valid || took) begin
        in_valid = ($urandom_range(0, 1) == 1);
        in_addr  = AW'($urandom);
        in_pol   = 1'($urandom);
      end
      out_ready = ($urandom_range(0, 99) < (((i / 700) % 2 != 0) ? 80 : 30));
      start = ($urandom_range(0, 999) == 0);
    end
    @(negedge clk); in_valid = 0; start = 0; out_ready = 1;
    repeat (20) @(negedge clk);
    check(n_out > 1000 && n_stall > 0, "traffic and back-pressure");
    $display("out %0d stalls %0d", n_out, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
