// tb_pi2_fifo: self-checking test of the packet-buffer FIFO.
//
// Random push/pop traffic (pushes only when not full, pops only when not
// empty, as the users of the FIFO do) against a queue model: first-word
// fall-through data order, empty/full flags at every cycle and `clear`.
module tb_pi2_fifo;
  localparam int DW = 12, DEPTH = 5;

  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] din = 0, dout;
  logic empty, full;

  pi2_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

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

  logic [DW-1:0] q [$];
  int n_full = 0;
  always @(posedge clk) if (rst_n) begin
    check(empty == (q.size() == 0), "empty flag");
    check(full == (q.size() == DEPTH), "full flag");
    if (q.size() > 0) check(dout == q[0], $sformatf("dout %0h exp %0h", dout, q[0]));
    if (full) n_full++;
    if (clear) q.delete();
    else begin
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      int bias;
      bias = ((i / 500) % 2 != 0) ? 70 : 30;   // phases that fill and drain
      @(negedge clk);
      push  = !full  && ($urandom_range(0, 99) < bias);
      pop   = !empty && ($urandom_range(0, 99) < 100 - bias);
      din   = DW'($urandom);
      clear = ($urandom_range(0, 999) == 0);
    end
    @(negedge clk); push = 0; pop = 0; clear = 0;
    @(negedge clk);
    check(n_full > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
