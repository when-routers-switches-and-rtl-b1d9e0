// tb_pi2_xbar: self-checking test of the switching crossbar.
//
// Random valid sources with random destinations.  Checks, each cycle: every
// destination gets exactly one of the sources aimed at it (if any), chosen
// round-robin from the one after its last winner; the data is that source's;
// a source is ready exactly when it won; a waiting source is served within NS
// grants of its destination.
module tb_pi2_xbar;
  localparam int NS = 3, ND = 4, DW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NS-1:0]         s_valid = '0, s_ready;
  logic [$clog2(ND)-1:0] s_dest [NS];
  logic [DW-1:0]         s_data [NS];
  logic [ND-1:0]         d_valid;
  logic [DW-1:0]         d_data [ND];

  pi2_xbar #(.NS(NS), .ND(ND), .DW(DW)) dut (.*);

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

  int ptr [ND], waitc [NS], n_pass = 0;
  logic [NS-1:0] taken = '0;   // sources served at the last clock edge
  always @(posedge clk) if (rst_n) begin
    logic [NS-1:0] exp_ready;
    exp_ready = '0;
    for (int d = 0; d < ND; d++) begin
      int w;
      w = -1;
      for (int o = 0; o < NS; o++) begin
        int s;
        s = (ptr[d] + o) % NS;
        if (w < 0 && s_valid[s] && int'(s_dest[s]) == d) w = s;
      end
      check(d_valid[d] == (w >= 0), $sformatf("d_valid[%0d]", d));
      if (w >= 0) begin
        check(d_data[d] == s_data[w], $sformatf("d_data[%0d]", d));
        exp_ready[w] = 1;
        ptr[d] = (w + 1) % NS;
        n_pass++;
      end
    end
    check(s_ready == exp_ready, "s_ready");
    taken = exp_ready;
    for (int s = 0; s < NS; s++) begin
      if (s_valid[s] && !exp_ready[s]) waitc[s]++; else waitc[s] = 0;
      check(waitc[s] < NS, "starvation bound");
    end
  end

  initial begin
    for (int s = 0; s < NS; s++) begin s_dest[s] = '0; s_data[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5000) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++)
        if (!s_valid[s] || taken[s]) begin      // hold until taken
          s_valid[s] = ($urandom_range(0, 3) != 0);
          s_dest[s]  = 2'($urandom_range(0, ND - 1));
          s_data[s]  = DW'($urandom);
        end
    end
    @(negedge clk); s_valid = '0;
    check(n_pass > 3000, "traffic flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
